// ub_router: input-buffered UB router with two virtual lanes.
//
// This is the forwarding core of both an NPU's UB IO controller and the
// rack's LRS switch plane. Each input port has one FIFO per virtual lane
// (vl_fifo). The packet at each lane head is routed by apr_route, using a
// shared linear_route_table with one read port per lane head. Every output
// port has a round-robin arbiter over all lane heads that want it and whose
// next VL the downstream buffer can accept (out_ready[o][vl]). A granted flit
// leaves on out_valid/out_flit in the same cycle and is popped.
//
// Timing: a flit written into an input FIFO in cycle t can leave in cycle
// t+1, so one hop costs one clock when the path is free; each output carries
// at most one flit per clock.
//
// Interfaces per port: in_valid/in_flit with in_ready[vl] back to the
// sender; out_valid/out_flit with out_ready[vl] from the receiver. A sender
// may only present a flit whose VL is ready. dead/alt_port mark ports that
// must not be used and the port to take instead. out_sr/out_redir pulse with
// a flit that was source routed or redirected (for statistics).
//
// Follows UB-Mesh's routing-capable UB IO controllers and All-Path Routing;
// the input-buffered micro-architecture, arbitration and buffer sizes are
// this implementation's choices.
module ub_router
  import ub_pkg::*;
#(
  parameter int unsigned NPORTS     = 16,
  parameter int unsigned DEPTH      = 2,
  parameter int unsigned LOCAL_PORT = 0,
  parameter bit          HAS_LOCAL  = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  ub_addr_t                   own_addr,
  input  logic                       local_en,
  input  logic [NPORTS-1:0]          dead,
  input  logic [NPORTS-1:0][6:0]     alt_port,
  // routing table defaults and management write
  input  rt_entry_t [NPU_SEG-1:0]    dflt_npu,
  input  rt_entry_t [RACK_SEG-1:0]   dflt_rack,
  input  rt_entry_t [POD_SEG-1:0]    dflt_pod,
  input  logic                       tbl_wr_en,
  input  tbl_sel_e                   tbl_wr_sel,
  input  logic [5:0]                 tbl_wr_idx,
  input  rt_entry_t                  tbl_wr_data,
  // ports
  input  logic  [NPORTS-1:0]           in_valid,
  input  flit_t [NPORTS-1:0]           in_flit,
  output logic  [NPORTS-1:0][N_VL-1:0] in_ready,
  output logic  [NPORTS-1:0]           out_valid,
  output flit_t [NPORTS-1:0]           out_flit,
  input  logic  [NPORTS-1:0][N_VL-1:0] out_ready,
  output logic  [NPORTS-1:0]           out_sr,
  output logic  [NPORTS-1:0]           out_redir
);
  localparam int unsigned R  = NPORTS * N_VL;       // lane heads
  localparam int unsigned RW = $clog2(R);

  logic  [R-1:0]      hv;        // lane head valid
  flit_t [R-1:0]      hf;        // lane head flit
  logic  [R-1:0]      pop;
  ub_addr_t  [R-1:0]  rd_dst;
  rt_entry_t [R-1:0]  rd_ent;
  logic [R-1:0][6:0]  rport;     // routed output port
  flit_t [R-1:0]      rflit;     // flit as it leaves
  logic  [R-1:0]      rsr, rredir;

  // ---------------- input buffers ----------------
  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    vl_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid  (in_valid[p]),
      .in_flit   (in_flit[p]),
      .in_ready  (in_ready[p]),
      .head_valid(hv[p*N_VL +: N_VL]),
      .head_flit (hf[p*N_VL +: N_VL]),
      .pop       (pop[p*N_VL +: N_VL])
    );
  end

  // ---------------- routing ----------------
  linear_route_table #(.NRD(R)) u_tbl (
    .clk, .rst_n, .own_addr,
    .dflt_npu, .dflt_rack, .dflt_pod,
    .wr_en(tbl_wr_en), .wr_sel(tbl_wr_sel), .wr_idx(tbl_wr_idx), .wr_data(tbl_wr_data),
    .rd_dst, .rd_entry(rd_ent)
  );

  for (genvar r = 0; r < R; r++) begin : g_rt
    assign rd_dst[r] = hf[r].dst;
    apr_route #(.NPORTS(NPORTS), .LOCAL_PORT(LOCAL_PORT), .HAS_LOCAL(HAS_LOCAL)) u_rt (
      .flit_in(hf[r]), .own_addr, .local_en,
      .tbl_entry(rd_ent[r]), .dead, .alt_port,
      .out_port(rport[r]), .flit_out(rflit[r]),
      .used_sr(rsr[r]), .redirected(rredir[r])
    );
  end

  // ---------------- output arbitration ----------------
  logic [NPORTS-1:0][R-1:0]  req;
  logic [NPORTS-1:0]         gv;
  logic [NPORTS-1:0][RW-1:0] gi;

  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      for (int r = 0; r < R; r++)
        req[o][r] = hv[r] && (rport[r] == 7'(o)) && out_ready[o][rflit[r].vl];
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    rr_arbiter #(.N(R)) u_arb (
      .clk, .rst_n, .req(req[o]), .advance(1'b1),
      .gnt_valid(gv[o]), .gnt_idx(gi[o])
    );
    assign out_valid[o] = gv[o];
    assign out_flit[o]  = rflit[gi[o]];
    assign out_sr[o]    = gv[o] && rsr[gi[o]];
    assign out_redir[o] = gv[o] && rredir[gi[o]];
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++)
      if (gv[o]) pop[gi[o]] = 1'b1;
  end
endmodule
