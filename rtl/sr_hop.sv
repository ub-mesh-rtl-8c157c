// sr_hop: source-routing decision of one router for one packet.
//
// The SR header holds a 4-bit hop pointer (ptr), a 12-bit bitmap with one
// bit per hop and six one-byte forwarding instructions. Bit ptr of the
// bitmap says whether this hop is forwarded by the header (1) or by the
// router's own table (0). For an SR hop the instruction used is the k-th,
// where k counts the 1 bits of the bitmap below ptr, so the k-th SR hop of
// the path consumes instruction[k]. Every router advances ptr by one
// (saturating), whether or not the hop was an SR hop. A pointer past the
// bitmap, or a seventh SR hop (only six instructions exist), falls back to the table.
//
// The header layout, the 4/12/6 sizes and the ptr/bitmap meaning follow the
// UB-Mesh SR header. The rule that picks the instruction by counting bitmap
// ones, and the saturating ptr, are this implementation's reading.
//
// Purely combinational; no clock.
module sr_hop
  import ub_pkg::*;
(
  input  sr_hdr_t          hdr_in,
  output logic             sr_fwd,    // this hop is source routed
  output logic [SR_INSTR_W-1:0] instr, // selected instruction (valid when sr_fwd)
  output sr_hdr_t          hdr_out    // header with ptr advanced
);
  logic [3:0]  idx;       // ones below ptr
  logic        in_range;
  logic [15:0] bm16;      // bitmap padded to the pointer's range
  logic [7:0][SR_INSTR_W-1:0] ins8; // instructions padded to a power of two

  always_comb begin
    idx = '0;
    for (int i = 0; i < SR_BITMAP_W; i++)
      if (i < int'(hdr_in.ptr) && hdr_in.bitmap[i]) idx = idx + 4'd1;
    bm16     = 16'(hdr_in.bitmap);
    ins8     = {{(8-SR_N_INSTR)*SR_INSTR_W{1'b0}}, hdr_in.instr};
    in_range = (int'(hdr_in.ptr) < SR_BITMAP_W);
    sr_fwd   = in_range && bm16[hdr_in.ptr] && (int'(idx) < SR_N_INSTR);
    instr    = ins8[idx[2:0]];
    hdr_out  = hdr_in;
    if (hdr_in.ptr != '1) hdr_out.ptr = hdr_in.ptr + 1'b1;
  end
endmodule
