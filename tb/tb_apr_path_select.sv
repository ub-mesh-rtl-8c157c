// tb_apr_path_select: packets of a flow rotate over its valid paths; a
// notification removes a path; with no valid path the header is zero.
module tb_apr_path_select;
  import ub_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_en, cfg_clear, nv, take, hv; logic [1:0] cf, cp, nf, np, rf, sp; sr_hdr_t ch, h;
  int checks = 0, failures = 0;

  apr_path_select #(.FLOWS(4), .PATHS(4)) dut (.clk, .rst_n, .cfg_en, .cfg_clear, .cfg_flow(cf),
    .cfg_path(cp), .cfg_hdr(ch), .notify_valid(nv), .notify_flow(nf), .notify_path(np),
    .req_flow(rf), .take, .hdr_valid(hv), .hdr(h), .sel_path(sp));

  function automatic sr_hdr_t mk(int f, int p); return sr_hdr_t'(64'h1000 * (f + 1) + 64'(p)); endfunction

  task automatic pick(input int f, input int ep, input bit ev);
    @(negedge clk); rf = 2'(f); take = 1'b1; #1;
    checks++;
    if (hv !== ev || (ev && (sp !== 2'(ep) || h !== mk(f, ep))) || (!ev && h !== '0)) begin
      failures++; $display("FAIL flow %0d: valid %b path %0d exp %0d", f, hv, sp, ep);
    end
    @(posedge clk); #1 take = 1'b0;
  endtask

  initial begin
    cfg_en = 0; cfg_clear = 0; nv = 0; take = 0; cf = 0; cp = 0; nf = 0; np = 0; rf = 0; ch = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    pick(1, 0, 1'b0);  // nothing configured
    // flow 1: paths 0,1,3
    for (int p = 0; p < 4; p++) if (p != 2) begin
      @(negedge clk); cfg_en = 1; cf = 2'd1; cp = 2'(p); ch = mk(1, p);
      @(posedge clk); #1 cfg_en = 0;
    end
    pick(1, 0, 1'b1); pick(1, 1, 1'b1); pick(1, 3, 1'b1); pick(1, 0, 1'b1); pick(1, 1, 1'b1);
    // notification kills path 3
    @(negedge clk); nv = 1; nf = 2'd1; np = 2'd3; @(posedge clk); #1 nv = 0;
    pick(1, 0, 1'b1); pick(1, 1, 1'b1); pick(1, 0, 1'b1);
    // management clears path 0 and 1
    for (int p = 0; p < 2; p++) begin
      @(negedge clk); cfg_en = 1; cfg_clear = 1; cf = 2'd1; cp = 2'(p); @(posedge clk); #1 cfg_en = 0; cfg_clear = 0;
    end
    pick(1, 0, 1'b0);
    // other flows untouched
    pick(2, 0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
