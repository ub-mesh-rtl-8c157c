// tb_linear_route_table: loads defaults, rewrites entries, and checks that
// each lookup picks the table of the first differing address segment and
// the entry at the destination's linear offset.
module tb_linear_route_table;
  import ub_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ub_addr_t own;
  rt_entry_t [NPU_SEG-1:0]  dn;
  rt_entry_t [RACK_SEG-1:0] dr;
  rt_entry_t [POD_SEG-1:0]  dp;
  logic wr_en; tbl_sel_e wr_sel; logic [5:0] wr_idx; rt_entry_t wr_data;
  ub_addr_t [1:0] dst; rt_entry_t [1:0] ent;
  rt_entry_t mn [64]; rt_entry_t mr [16]; rt_entry_t mp [8];
  int checks = 0, failures = 0;

  linear_route_table #(.NRD(2)) dut (.clk, .rst_n, .own_addr(own), .dflt_npu(dn), .dflt_rack(dr),
    .dflt_pod(dp), .wr_en, .wr_sel, .wr_idx, .wr_data, .rd_dst(dst), .rd_entry(ent));

  function automatic rt_entry_t model(ub_addr_t d);
    if (d.pod != own.pod) return mp[d.pod];
    if ({d.rrow, d.rcol} != {own.rrow, own.rcol}) return mr[{d.rrow, d.rcol}];
    return mn[{d.y, d.x}];
  endfunction

  initial begin
    own = '{pod: 3'd2, rrow: 2'd1, rcol: 2'd3, y: 3'd4, x: 3'd5};
    for (int i = 0; i < 64; i++) begin dn[i] = 8'(i); mn[i] = 8'(i); end
    for (int i = 0; i < 16; i++) begin dr[i] = 8'(100 + i); mr[i] = 8'(100 + i); end
    for (int i = 0; i < 8; i++)  begin dp[i] = 8'(200 + i); mp[i] = 8'(200 + i); end
    wr_en = 0; wr_sel = TBL_NPU; wr_idx = 0; wr_data = '0; dst = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // random write, mirrored in the model
      wr_en = ($urandom % 3 == 0);
      wr_sel = tbl_sel_e'($urandom % 3); wr_idx = 6'($urandom); wr_data = 8'($urandom);
      // random lookups, biased towards the own Pod and rack
      for (int r = 0; r < 2; r++) begin
        dst[r] = ub_addr_t'($urandom);
        if ($urandom % 2) dst[r].pod = own.pod;
        if ($urandom % 2) {dst[r].rrow, dst[r].rcol} = {own.rrow, own.rcol};
      end
      #1;
      for (int r = 0; r < 2; r++) begin
        checks++;
        if (ent[r] !== model(dst[r])) begin failures++; $display("FAIL dst=%h got %h exp %h", dst[r], ent[r], model(dst[r])); end
      end
      @(posedge clk);
      if (wr_en) case (wr_sel)
        TBL_NPU: mn[wr_idx] = wr_data; TBL_RACK: mr[wr_idx[3:0]] = wr_data; default: mp[wr_idx[2:0]] = wr_data;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
