// ub_mesh_pod: a UB-Mesh Pod, RR x RC racks joined into a 4D full mesh.
//
// Inside each rack the NPUs form a 2D full mesh (X on a board, Y across
// boards). Between racks a second 2D full mesh is built from the racks'
// LRS planes: every rack is linked directly to every other rack of its row
// and of its column. With 64 NPUs per rack and 4 x 4 racks the Pod holds
// 1024 NPUs, and any two NPUs are at most NPU-LRS-LRS-LRS-NPU apart on the
// default routes (fewer when they share a rack, board or row).
//
// Rack (r, c) is instance g_row[r].g_col[c]; rack index r*RC + c is used in
// all per-rack port arrays. Its LRS external port c' (c' != c) is wired to
// rack (r, c')'s port c; its port RC + r' (r' != r) to rack (r', c)'s port
// RC + r. The remaining two external slots of each rack leave the Pod: slot
// c is the rack's CPU-board port (cpu_*), slot RC + r its uplink to the
// Pod-level high-radix switches (hrs_*), both as flit channels with per-VL
// ready. The NPUs' compute cores are outside this design: each NPU's
// injection/ejection port (core_*) is a port of the Pod, index
// [rack][node], node NN being the rack's backup NPU.
//
// cfg is the management bus (routing tables, source paths, notification
// targets, backup activation) shared by all racks. npu_link_up and
// rack_link_up let a link be taken down to exercise fault handling; a link
// is down when either end reports it down.
//
// Events (ev_*) are OR-ed over the Pod and pulse in each cycle in which at
// least one router source-routed a flit, redirected one around a fault,
// sent one to a backup NPU, or sent/consumed a direct notification.
//
// The 4x4 rack grid, 64 NPUs per rack and the row/column full meshes follow
// the UB-Mesh-Pod; the channel model of a link (one flit per cycle) is this
// design's abstraction of a UB x128 rack link or UB lane group. The default
// grid is 2 x 2 racks (256 NPUs) so that a flat lint of the design fits in
// 16 GB of memory; RR = RC = 4 gives the full 1024-NPU Pod.
module ub_mesh_pod
  import ub_pkg::*;
#(
  parameter int unsigned N_X   = 8,
  parameter int unsigned N_Y   = 8,
  parameter int unsigned RR    = 2,
  parameter int unsigned RC    = 2,
  parameter int unsigned DEPTH = 2,
  localparam int unsigned NN   = N_X * N_Y,
  localparam int unsigned NP   = N_X + N_Y,
  localparam int unsigned NE   = RC + RR,
  localparam int unsigned NR   = RR * RC
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [2:0]                        pod_id,
  input  cfg_t                              cfg,
  input  logic [NR-1:0][NN-1:0][NP-1:0]     npu_link_up,
  input  logic [NR-1:0][NE-1:0]             rack_link_up,
  // compute cores
  input  logic     [NR-1:0][NN:0]           core_tx_valid,
  input  ub_addr_t [NR-1:0][NN:0]           core_tx_dst,
  input  logic     [NR-1:0][NN:0][1:0]      core_tx_flow,
  input  logic     [NR-1:0][NN:0]           core_tx_sr,
  input  logic     [NR-1:0][NN:0][31:0]     core_tx_payload,
  output logic     [NR-1:0][NN:0]           core_tx_ready,
  output logic     [NR-1:0][NN:0]           core_rx_valid,
  output flit_t    [NR-1:0][NN:0]           core_rx_flit,
  input  logic     [NR-1:0][NN:0]           core_rx_ready,
  // CPU-board ports, one per rack
  input  logic  [NR-1:0]                    cpu_in_valid,
  input  flit_t [NR-1:0]                    cpu_in_flit,
  output logic  [NR-1:0][N_VL-1:0]          cpu_in_ready,
  output logic  [NR-1:0]                    cpu_out_valid,
  output flit_t [NR-1:0]                    cpu_out_flit,
  input  logic  [NR-1:0][N_VL-1:0]          cpu_out_ready,
  // Pod-switch (HRS) uplinks, one per rack
  input  logic  [NR-1:0]                    hrs_in_valid,
  input  flit_t [NR-1:0]                    hrs_in_flit,
  output logic  [NR-1:0][N_VL-1:0]          hrs_in_ready,
  output logic  [NR-1:0]                    hrs_out_valid,
  output flit_t [NR-1:0]                    hrs_out_flit,
  input  logic  [NR-1:0][N_VL-1:0]          hrs_out_ready,
  // state and events
  output logic  [NR-1:0]                    backup_active,
  output logic                              ev_sr,
  output logic                              ev_redir,
  output logic                              ev_backup,
  output logic                              ev_notify_tx,
  output logic                              ev_notify_rx
);
  logic  [NR-1:0][NE-1:0]           x_in_valid, x_out_valid, x_up;
  flit_t [NR-1:0][NE-1:0]           x_in_flit, x_out_flit;
  logic  [NR-1:0][NE-1:0][N_VL-1:0] x_in_ready, x_out_ready;
  logic  [NR-1:0]                   e_sr, e_redir, e_bk, e_ntx, e_nrx;

  // rack-to-rack wiring, forward direction
  always_comb begin
    for (int r = 0; r < int'(RR); r++)
      for (int c = 0; c < int'(RC); c++) begin
        int k;
        k = r * int'(RC) + c;
        for (int e = 0; e < int'(NE); e++) begin
          x_in_valid[k][e] = 1'b0;
          x_in_flit[k][e]  = '0;
          if (e < int'(RC)) begin
            if (e == c) begin
              x_in_valid[k][e] = cpu_in_valid[k];
              x_in_flit[k][e]  = cpu_in_flit[k];
            end else begin
              x_in_valid[k][e] = x_out_valid[r * int'(RC) + e][c];
              x_in_flit[k][e]  = x_out_flit[r * int'(RC) + e][c];
            end
          end else if (e - int'(RC) == r) begin
            x_in_valid[k][e] = hrs_in_valid[k];
            x_in_flit[k][e]  = hrs_in_flit[k];
          end else begin
            x_in_valid[k][e] = x_out_valid[(e - int'(RC)) * int'(RC) + c][int'(RC) + r];
            x_in_flit[k][e]  = x_out_flit[(e - int'(RC)) * int'(RC) + c][int'(RC) + r];
          end
        end
      end
  end

  // backward direction and link state
  always_comb begin
    for (int r = 0; r < int'(RR); r++)
      for (int c = 0; c < int'(RC); c++) begin
        int k;
        k = r * int'(RC) + c;
        cpu_out_valid[k] = x_out_valid[k][c];
        cpu_out_flit[k]  = x_out_flit[k][c];
        cpu_in_ready[k]  = x_in_ready[k][c];
        hrs_out_valid[k] = x_out_valid[k][int'(RC) + r];
        hrs_out_flit[k]  = x_out_flit[k][int'(RC) + r];
        hrs_in_ready[k]  = x_in_ready[k][int'(RC) + r];
        for (int e = 0; e < int'(NE); e++) begin
          if (e < int'(RC)) begin
            if (e == c) begin
              x_out_ready[k][e] = cpu_out_ready[k];
              x_up[k][e]        = rack_link_up[k][e];
            end else begin
              x_out_ready[k][e] = x_in_ready[r * int'(RC) + e][c];
              x_up[k][e]        = rack_link_up[k][e] && rack_link_up[r * int'(RC) + e][c];
            end
          end else if (e - int'(RC) == r) begin
            x_out_ready[k][e] = hrs_out_ready[k];
            x_up[k][e]        = rack_link_up[k][e];
          end else begin
            x_out_ready[k][e] = x_in_ready[(e - int'(RC)) * int'(RC) + c][int'(RC) + r];
            x_up[k][e]        = rack_link_up[k][e] &&
                                rack_link_up[(e - int'(RC)) * int'(RC) + c][int'(RC) + r];
          end
        end
      end
  end

  for (genvar r = 0; r < RR; r++) begin : g_row
    for (genvar c = 0; c < RC; c++) begin : g_col
      localparam int unsigned K = r * RC + c;
      logic [5:0] failed_off;
      ub_mesh_rack #(
        .N_X(N_X), .N_Y(N_Y), .RR(RR), .RC(RC), .MY_ROW(r), .MY_COL(c), .DEPTH(DEPTH)
      ) u_rack (
        .clk, .rst_n, .pod_id, .cfg,
        .npu_link_up(npu_link_up[K]), .ext_link_up(x_up[K]),
        .ext_in_valid(x_in_valid[K]), .ext_in_flit(x_in_flit[K]), .ext_in_ready(x_in_ready[K]),
        .ext_out_valid(x_out_valid[K]), .ext_out_flit(x_out_flit[K]), .ext_out_ready(x_out_ready[K]),
        .core_tx_valid(core_tx_valid[K]), .core_tx_dst(core_tx_dst[K]),
        .core_tx_flow(core_tx_flow[K]), .core_tx_sr(core_tx_sr[K]),
        .core_tx_payload(core_tx_payload[K]), .core_tx_ready(core_tx_ready[K]),
        .core_rx_valid(core_rx_valid[K]), .core_rx_flit(core_rx_flit[K]),
        .core_rx_ready(core_rx_ready[K]),
        .backup_active(backup_active[K]), .failed_off(failed_off),
        .ev_sr(e_sr[K]), .ev_redir(e_redir[K]), .ev_backup(e_bk[K]),
        .ev_notify_tx(e_ntx[K]), .ev_notify_rx(e_nrx[K])
      );
    end
  end

  assign ev_sr        = |e_sr;
  assign ev_redir     = |e_redir;
  assign ev_backup    = |e_bk;
  assign ev_notify_tx = |e_ntx;
  assign ev_notify_rx = |e_nrx;
endmodule
