// fault_notify: topology-aware direct notification of link failures.
//
// Instead of letting a link failure spread hop by hop while every router
// recomputes routes, the node at the end of a failed link sends one
// notification packet straight to each node whose traffic used that link.
// Who those nodes are is known in advance (training traffic is
// deterministic), so management pre-loads, per local port, up to SLOTS
// entries {target address, flow, path}.
//
// When link_up[p] falls, every valid entry of port p becomes pending. The
// pending entries are sent one per cycle (lowest port and slot first) as
// PKT_NOTIFY flits on out_valid/out_flit while out_ready is high; the
// payload names the flow, the path and the failed port. The flits use VL 0
// and table routing, which already avoids the dead port.
//
// The direct-notification idea follows UB-Mesh; the table, its size and the
// packet format are this implementation's choices.
module fault_notify
  import ub_pkg::*;
#(
  parameter int unsigned NPORTS = 16,
  parameter int unsigned SLOTS  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  ub_addr_t           own_addr,
  input  logic [NPORTS-1:0]  link_up,
  input  logic               cfg_en,
  input  logic [3:0]         cfg_port,
  input  logic               cfg_slot,
  input  notify_ent_t        cfg_ent,
  output logic               out_valid,
  output flit_t              out_flit,
  input  logic               out_ready
);
  localparam int unsigned NE = NPORTS * SLOTS;

  notify_ent_t       tbl [NE];
  logic [NPORTS-1:0] up_q;
  logic [NE-1:0]     pending;
  logic [$clog2(NE)-1:0] sel;

  always_comb begin
    out_valid = 1'b0;
    sel       = '0;
    for (int e = NE - 1; e >= 0; e--)
      if (pending[e]) begin out_valid = 1'b1; sel = $clog2(NE)'(e); end
    out_flit          = '0;
    out_flit.typ      = PKT_NOTIFY;
    out_flit.vl       = 1'b0;
    out_flit.dst      = tbl[sel].target;
    out_flit.src      = own_addr;
    out_flit.payload  = 32'({tbl[sel].flow, tbl[sel].path, 4'(int'(sel) / SLOTS)});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_q    <= '1;
      pending <= '0;
      for (int e = 0; e < NE; e++) tbl[e] <= '0;
    end else begin
      up_q <= link_up;
      for (int e = 0; e < NE; e++)
        if (up_q[e / SLOTS] && !link_up[e / SLOTS] && tbl[e].valid) pending[e] <= 1'b1;
      if (out_valid && out_ready) pending[sel] <= 1'b0;
      if (cfg_en && int'(cfg_port) < NPORTS)
        tbl[int'(cfg_port) * SLOTS + int'(cfg_slot) % SLOTS] <= cfg_ent;
    end
  end
endmodule
