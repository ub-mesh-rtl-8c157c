// tb_vl_fifo: random pushes on both lanes (only when ready) and random pops;
// each lane must return its flits in order, lanes independent.
module tb_vl_fifo;
  import ub_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; flit_t in_flit; logic [1:0] in_ready, head_valid, pop; flit_t [1:0] head_flit;
  logic [31:0] q [2][$];
  int checks = 0, failures = 0, sent = 0;
  logic [31:0] seq = 0;

  vl_fifo #(.DEPTH(2)) dut (.clk, .rst_n, .in_valid, .in_flit, .in_ready, .head_valid, .head_flit, .pop);

  initial begin
    in_valid = 0; in_flit = '0; pop = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (in_ready !== 2'b11 || head_valid !== 2'b00) begin failures++; $display("FAIL after reset"); end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_flit = '0; in_flit.vl = 1'($urandom); in_flit.payload = seq;
      in_valid = ($urandom % 4 != 0) && in_ready[in_flit.vl];
      pop = 2'($urandom);
      #1;
      for (int v = 0; v < 2; v++) begin
        checks++;
        if (head_valid[v] !== (q[v].size() != 0) || in_ready[v] !== (q[v].size() < 2)) begin
          failures++; $display("FAIL lane %0d status size=%0d hv=%b rdy=%b", v, q[v].size(), head_valid[v], in_ready[v]);
        end
      end
      for (int v = 0; v < 2; v++) if (pop[v] && head_valid[v]) begin
        checks++;
        if (q[v].size() == 0 || head_flit[v].payload !== q[v][0] || head_flit[v].vl !== 1'(v)) begin
          failures++; $display("FAIL lane %0d order", v);
        end
        if (q[v].size() != 0) void'(q[v].pop_front());
      end
      if (in_valid) begin q[in_flit.vl].push_back(seq); seq++; sent++; end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
