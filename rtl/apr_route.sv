// apr_route: route computation for the packet at the head of one input lane.
//
// Order of decisions:
//  1. Local delivery: a router with a local port (an NPU) delivers a packet
//     whose destination equals its own address (local_en gates this, so a
//     standby backup NPU accepts nothing).
//  2. Source routing: if the SR header marks this hop as an SR hop, the
//     selected instruction gives the output port and next VL.
//  3. Otherwise the linear routing table entry (looked up by the caller on
//     the same destination) gives port and VL; the VL only rises
//     (out vl = in vl OR entry vl), so a packet never returns to lane 0.
//  4. Fault redirection: if the chosen port is marked dead (its link is down
//     or the neighbour behind it is a failed NPU) the packet takes the
//     port's alternative, alt_port[port]; in an NPU that is the LRS uplink,
//     in the LRS plane the backup NPU or the Pod-switch uplink. The same
//     happens for a port number outside the router.
// The outgoing flit carries the advanced SR pointer and the new VL.
//
// Steps 2-3 follow UB-Mesh's All-Path Routing (source routing plus linear
// table lookup), step 4 its 64+1 backup redirection ("path 5-3 becomes
// 5-LRS-B") and link-failure switching. The precedence order and the VL
// rule are this implementation's choices (the paper's deadlock-free VL
// assignment, TFC, is not published; here VLs come from the table or the
// SR instruction, computed offline).
//
// Purely combinational.
module apr_route
  import ub_pkg::*;
#(
  parameter int unsigned NPORTS     = 16,
  parameter int unsigned LOCAL_PORT = 0,
  parameter bit          HAS_LOCAL  = 1'b1
) (
  input  flit_t                   flit_in,
  input  ub_addr_t                own_addr,
  input  logic                    local_en,
  input  rt_entry_t               tbl_entry,
  input  logic [NPORTS-1:0]       dead,
  input  logic [NPORTS-1:0][6:0]  alt_port,
  output logic [6:0]              out_port,
  output flit_t                   flit_out,
  output logic                    used_sr,     // for statistics
  output logic                    redirected   // for statistics
);
  logic      sr_fwd;
  sr_instr_t instr;
  sr_hdr_t   hdr_adv;
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  logic [6:0] p;
  logic       vl;

  sr_hop u_sr (.hdr_in(flit_in.sr), .sr_fwd(sr_fwd), .instr(instr), .hdr_out(hdr_adv));

  always_comb begin
    used_sr    = 1'b0;
    redirected = 1'b0;
    if (HAS_LOCAL && local_en && flit_in.dst == own_addr) begin
      p  = 7'(LOCAL_PORT);
      vl = flit_in.vl;
    end else if (sr_fwd) begin
      p       = instr.port;
      vl      = instr.vl;
      used_sr = 1'b1;
    end else begin
      p  = tbl_entry.port;
      vl = flit_in.vl | tbl_entry.vl;
    end
    if (int'(p) >= NPORTS) begin
      p          = alt_port[0];
      redirected = 1'b1;
    end else if (dead[p[PW-1:0]]) begin
      p          = alt_port[p[PW-1:0]];
      redirected = 1'b1;
    end
    out_port    = p;
    flit_out    = flit_in;
    flit_out.sr = hdr_adv;
    flit_out.vl = vl;
  end
endmodule
