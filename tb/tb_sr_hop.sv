// tb_sr_hop: checks the SR header decode against a reference that works on
// the raw 64-bit header byte by byte (byte 0 bits 3:0 = ptr, bitmap =
// {byte1, byte0[7:4]}, bytes 2..7 = instruction[0..5]).
module tb_sr_hop;
  import ub_pkg::*;
  sr_hdr_t hin, hout;
  logic sr_fwd;
  logic [7:0] instr;
  int checks = 0, failures = 0;

  sr_hop dut (.hdr_in(hin), .sr_fwd(sr_fwd), .instr(instr), .hdr_out(hout));

  task automatic check_one(input logic [63:0] raw);
    logic [3:0] ptr; logic [11:0] bm; int k; logic exp_fwd; logic [7:0] exp_ins; logic [3:0] exp_ptr;
    ptr = raw[3:0];
    bm  = {raw[15:8], raw[7:4]};
    k = 0;
    for (int i = 0; i < 12; i++) if (i < ptr && bm[i]) k++;
    exp_fwd = (ptr < 12) && bm[ptr] && (k < 6);
    exp_ins = raw[16 + 8*(k % 6) +: 8];
    exp_ptr = (ptr == 4'hf) ? 4'hf : ptr + 1;
    hin = sr_hdr_t'(raw);
    #1;
    checks++;
    if (sr_fwd !== exp_fwd || (exp_fwd && instr !== exp_ins) || hout.ptr !== exp_ptr ||
        hout.bitmap !== hin.bitmap || hout.instr !== hin.instr) begin
      failures++;
      $display("FAIL raw=%h fwd=%b/%b instr=%h/%h ptr=%h/%h", raw, sr_fwd, exp_fwd, instr, exp_ins, hout.ptr, exp_ptr);
    end
  endtask

  initial begin
    // directed: bitmap 0b101 (hops 0 and 2 SR), instructions 0x11..0x66
    for (int p = 0; p < 4; p++)
      check_one({8'h66, 8'h55, 8'h44, 8'h33, 8'h22, 8'h11, 8'h00, 4'b0101, 4'(p)});
    // hop 2 must use instruction[1] = 0x22
    hin = sr_hdr_t'({8'h66, 8'h55, 8'h44, 8'h33, 8'h22, 8'h11, 8'h00, 4'b0101, 4'd2}); #1;
    checks++; if (!(sr_fwd && instr == 8'h22)) begin failures++; $display("FAIL directed hop2"); end
    // all ones: seventh SR hop has no instruction
    hin = sr_hdr_t'({48'h0, 12'hfff, 4'd6}); #1;
    checks++; if (sr_fwd) begin failures++; $display("FAIL seventh SR hop"); end
    for (int n = 0; n < 2000; n++) check_one({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
