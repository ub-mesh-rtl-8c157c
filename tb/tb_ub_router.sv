// tb_ub_router: a 4-port router. Flits enter random ports with a random
// destination NPU x in 0..3; the default table sends x to port x. Outputs
// apply random backpressure per VL. Every flit must leave exactly once on
// the right port with its VL kept; a lone flit must take exactly one cycle.
module tb_ub_router;
  import ub_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ub_addr_t own;
  rt_entry_t [NPU_SEG-1:0] dn; rt_entry_t [RACK_SEG-1:0] dr; rt_entry_t [POD_SEG-1:0] dp;
  logic [NP-1:0] in_valid, out_valid, osr, ored; flit_t [NP-1:0] in_flit, out_flit;
  logic [NP-1:0][1:0] in_ready, out_ready;
  int checks = 0, failures = 0, sent = 0, got = 0;
  int exp_port [int];

  ub_router #(.NPORTS(NP), .DEPTH(2), .LOCAL_PORT(0), .HAS_LOCAL(1'b1)) dut (
    .clk, .rst_n, .own_addr(own), .local_en(1'b1), .dead('0), .alt_port('0),
    .dflt_npu(dn), .dflt_rack(dr), .dflt_pod(dp),
    .tbl_wr_en(1'b0), .tbl_wr_sel(TBL_NPU), .tbl_wr_idx('0), .tbl_wr_data('0),
    .in_valid, .in_flit, .in_ready, .out_valid, .out_flit, .out_ready, .out_sr(osr), .out_redir(ored));

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) if (out_valid[o]) begin
      int id;
      id = int'(out_flit[o].payload);
      checks++;
      if (!exp_port.exists(id) || exp_port[id] != o || !out_ready[o][out_flit[o].vl]) begin
        failures++; $display("FAIL flit %0d at port %0d", id, o);
      end else exp_port.delete(id);
      got++;
    end
  end

  initial begin
    own = '0;
    for (int i = 0; i < NPU_SEG; i++) dn[i] = '{vl: 1'b0, port: 7'(i % 8 % NP)};
    dr = '0; dp = '0;
    in_valid = '0; in_flit = '0; out_ready = '1;
    repeat (2) @(posedge clk); rst_n = 1;
    // latency: one flit in at cycle t, out at t+1
    @(negedge clk);
    in_flit[1] = '0; in_flit[1].dst.x = 3'd2; in_flit[1].payload = 32'd100000; in_valid[1] = 1'b1;
    exp_port[100000] = 2; sent++;
    @(negedge clk); in_valid = '0;
    checks++; if (!(out_valid[2] && out_flit[2].payload == 32'd100000)) begin failures++; $display("FAIL latency"); end
    @(negedge clk);
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < NP; p++) begin
        flit_t f;
        f = '0; f.vl = 1'($urandom); f.dst.x = 3'($urandom % NP); f.payload = 32'(sent);
        in_flit[p] = f;
        in_valid[p] = ($urandom % 2) && in_ready[p][f.vl];
        if (in_valid[p]) begin exp_port[sent] = int'(f.dst.x); sent++; end
      end
      out_ready = 8'($urandom) | 8'($urandom);
      @(negedge clk);
    end
    in_valid = '0; out_ready = '1;
    repeat (50) @(negedge clk);
    checks++;
    if (exp_port.size() != 0 || got != sent) begin failures++; $display("FAIL lost %0d flits (sent %0d got %0d)", exp_port.size(), sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
