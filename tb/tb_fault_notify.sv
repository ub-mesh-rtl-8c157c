// tb_fault_notify: a falling link_up on a port sends one notification per
// configured target of that port, with the right destination and payload;
// ports without targets and rising edges send nothing.
module tb_fault_notify;
  import ub_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ub_addr_t own; logic [15:0] up; logic cfg_en, cfg_slot, ov, ordy; logic [3:0] cfg_port;
  notify_ent_t ent; flit_t of;
  int checks = 0, failures = 0, seen = 0;
  notify_ent_t model [16][2];

  fault_notify #(.NPORTS(16), .SLOTS(2)) dut (.clk, .rst_n, .own_addr(own), .link_up(up),
    .cfg_en, .cfg_port, .cfg_slot, .cfg_ent(ent), .out_valid(ov), .out_flit(of), .out_ready(ordy));

  // expected notifications queue
  notify_ent_t expq [$]; int expport [$];
  always @(posedge clk) if (rst_n && ov && ordy) begin
    notify_pl_t pl;
    pl = notify_pl_t'(of.payload);
    checks++; seen++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected notification"); end
    else begin
      if (of.typ !== PKT_NOTIFY || of.dst !== expq[0].target || of.src !== own || pl.flow !== expq[0].flow ||
          pl.path !== expq[0].path || int'(pl.link_port) != expport[0]) begin
        failures++; $display("FAIL notification contents dst=%h", of.dst);
      end
      void'(expq.pop_front()); void'(expport.pop_front());
    end
  end

  initial begin
    own = ub_addr_t'(13'h0abc); up = '1; cfg_en = 0; cfg_slot = 0; cfg_port = 0; ent = '0; ordy = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    // port 5: two targets, port 9: one target
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); cfg_en = 1;
      cfg_port = (k < 2) ? 4'd5 : 4'd9; cfg_slot = 1'(k % 2);
      ent = '{valid: 1'b1, target: ub_addr_t'(13'h100 + k), flow: 2'(k), path: 2'(3 - k)};
      @(posedge clk); #1 cfg_en = 0;
    end
    // port 5 goes down while the receiver stalls
    @(negedge clk); ordy = 0; up[5] = 0;
    expq.push_back('{1'b1, ub_addr_t'(13'h100), 2'd0, 2'd3}); expport.push_back(5);
    expq.push_back('{1'b1, ub_addr_t'(13'h101), 2'd1, 2'd2}); expport.push_back(5);
    repeat (3) @(negedge clk);
    ordy = 1;
    repeat (5) @(negedge clk);
    checks++; if (seen != 2) begin failures++; $display("FAIL expected 2 notifications, saw %0d", seen); end
    // port 5 back up: nothing; port 2 (no targets) down: nothing; port 9 down: one
    up[5] = 1; up[2] = 0; repeat (3) @(negedge clk);
    checks++; if (seen != 2) begin failures++; $display("FAIL spurious notification"); end
    up[9] = 0;
    expq.push_back('{1'b1, ub_addr_t'(13'h102), 2'd2, 2'd1}); expport.push_back(9);
    repeat (4) @(negedge clk);
    checks++; if (seen != 3 || expq.size() != 0) begin failures++; $display("FAIL port 9 notification"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
