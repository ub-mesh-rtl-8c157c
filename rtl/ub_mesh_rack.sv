// ub_mesh_rack: one UB-Mesh rack, a 2D full mesh of NPUs plus a switch plane
// and a backup NPU ("64+1").
//
// N_Y boards carry N_X NPUs each (8 x 8 = 64). The NPUs of a board are
// fully connected (X full mesh); NPUs at the same position on different
// boards are fully connected too (Y full mesh), so any NPU reaches any other
// in at most two direct hops. Every NPU also has one link to the rack's LRS
// plane, which connects the backup NPU, the CPU boards and the neighbour
// racks.
//
// Node numbering: NPU (x, y) is node y*N_X + x and has address
// {pod, MY_ROW, MY_COL, y, x}; node NN = N_X*N_Y is the backup NPU.
// Wiring: NPU (x,y) port x' <-> NPU (x',y) port x; port N_X+y' <-> NPU
// (x,y') port N_X+y; port N_X+y (uplink) <-> LRS port y*N_X+x. The backup
// NPU uses only its uplink (port N_X) to LRS port NN.
//
// 64+1 failover: management writes CFG_FAIL to node NODE_RACK with the
// offset {y,x} of a failed NPU and the active bit. Then
//  - the backup NPU takes the failed NPU's address and accepts its traffic,
//  - every NPU marks its direct link to the failed NPU dead, so that
//    traffic goes NPU - LRS - backup instead (one extra hop),
//  - the LRS marks the failed NPU's port dead and sends its traffic to the
//    backup port.
// A link is up when both of its ends report up (npu_link_up per NPU port,
// rack_link_up per rack link); the NPU at a dead end sends its direct
// notifications.
//
// External ports: the LRS plane's rack-row/column ports (ext_*, index c for
// the row link to column c, RC + r for the column link to row r; the own
// slots are the CPU and HRS ports), and the core side of every NPU and of
// the backup NPU (index NN).
//
// Structure and sizes follow UB-Mesh's rack; the failover register and the
// way dead links are marked are this design's choices.
module ub_mesh_rack
  import ub_pkg::*;
#(
  parameter int unsigned N_X    = 8,
  parameter int unsigned N_Y    = 8,
  parameter int unsigned RR     = 4,
  parameter int unsigned RC     = 4,
  parameter int unsigned MY_ROW = 0,
  parameter int unsigned MY_COL = 0,
  parameter int unsigned DEPTH  = 2,
  localparam int unsigned NN    = N_X * N_Y,
  localparam int unsigned NP    = N_X + N_Y,      // ports per NPU
  localparam int unsigned NE    = RC + RR,        // external LRS ports
  localparam int unsigned NL    = NN + 1 + NE     // LRS ports
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [2:0]                   pod_id,
  input  cfg_t                         cfg,
  input  logic [NN-1:0][NP-1:0]        npu_link_up,
  input  logic [NE-1:0]                ext_link_up,
  // LRS plane external ports
  input  logic  [NE-1:0]               ext_in_valid,
  input  flit_t [NE-1:0]               ext_in_flit,
  output logic  [NE-1:0][N_VL-1:0]     ext_in_ready,
  output logic  [NE-1:0]               ext_out_valid,
  output flit_t [NE-1:0]               ext_out_flit,
  input  logic  [NE-1:0][N_VL-1:0]     ext_out_ready,
  // core side of NN NPUs and the backup NPU
  input  logic     [NN:0]              core_tx_valid,
  input  ub_addr_t [NN:0]              core_tx_dst,
  input  logic     [NN:0][1:0]         core_tx_flow,
  input  logic     [NN:0]              core_tx_sr,
  input  logic     [NN:0][31:0]        core_tx_payload,
  output logic     [NN:0]              core_tx_ready,
  output logic     [NN:0]              core_rx_valid,
  output flit_t    [NN:0]              core_rx_flit,
  input  logic     [NN:0]              core_rx_ready,
  // state and events
  output logic                         backup_active,
  output logic [5:0]                   failed_off,
  output logic                         ev_sr,
  output logic                         ev_redir,
  output logic                         ev_backup,
  output logic                         ev_notify_tx,
  output logic                         ev_notify_rx
);
  // ---------------- 64+1 failover register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      backup_active <= 1'b0;
      failed_off    <= '0;
    end else if (cfg.valid && cfg.kind == CFG_FAIL && cfg.node == NODE_RACK &&
                 cfg.rack == 4'({2'(MY_ROW), 2'(MY_COL)})) begin
      backup_active <= cfg.data[6];
      failed_off    <= cfg.data[5:0];
    end
  end

  // ---------------- NPU side signals ----------------
  logic  [NN:0][NP-1:0]           n_in_valid, n_out_valid;
  flit_t [NN:0][NP-1:0]           n_in_flit, n_out_flit;
  logic  [NN:0][NP-1:0][N_VL-1:0] n_in_ready, n_out_ready;
  logic  [NN:0][NP-1:0]           n_up, n_dead;
  logic  [NN:0]                   e_sr, e_redir, e_ntx, e_nrx;

  // ---------------- LRS side signals ----------------
  logic  [NL-1:0]                 l_in_valid, l_out_valid;
  flit_t [NL-1:0]                 l_in_flit, l_out_flit;
  logic  [NL-1:0][N_VL-1:0]       l_in_ready, l_out_ready;
  logic  [NL-1:0]                 l_up, l_dead;

  // forward direction: who drives each receiver
  always_comb begin
    for (int y = 0; y < int'(N_Y); y++)
      for (int x = 0; x < int'(N_X); x++) begin
        int n;
        n = y * int'(N_X) + x;
        for (int p = 0; p < int'(NP); p++) begin
          n_in_valid[n][p] = 1'b0;
          n_in_flit[n][p]  = '0;
          if (p < int'(N_X)) begin
            if (p != x) begin
              n_in_valid[n][p] = n_out_valid[y * int'(N_X) + p][x];
              n_in_flit[n][p]  = n_out_flit[y * int'(N_X) + p][x];
            end
          end else if (p - int'(N_X) != y) begin
            n_in_valid[n][p] = n_out_valid[(p - int'(N_X)) * int'(N_X) + x][int'(N_X) + y];
            n_in_flit[n][p]  = n_out_flit[(p - int'(N_X)) * int'(N_X) + x][int'(N_X) + y];
          end else begin
            n_in_valid[n][p] = l_out_valid[n];
            n_in_flit[n][p]  = l_out_flit[n];
          end
        end
      end
    // backup NPU: only its uplink, port N_X
    for (int p = 0; p < int'(NP); p++) begin
      n_in_valid[NN][p] = (p == int'(N_X)) ? l_out_valid[NN] : 1'b0;
      n_in_flit[NN][p]  = (p == int'(N_X)) ? l_out_flit[NN]  : '0;
    end
    // LRS inputs
    for (int n = 0; n < int'(NN); n++) begin
      l_in_valid[n] = n_out_valid[n][int'(N_X) + n / int'(N_X)];
      l_in_flit[n]  = n_out_flit[n][int'(N_X) + n / int'(N_X)];
    end
    l_in_valid[NN] = n_out_valid[NN][N_X];
    l_in_flit[NN]  = n_out_flit[NN][N_X];
    for (int e = 0; e < int'(NE); e++) begin
      l_in_valid[NN + 1 + e] = ext_in_valid[e];
      l_in_flit[NN + 1 + e]  = ext_in_flit[e];
    end
  end

  // backward direction: ready of each sender, link state
  always_comb begin
    for (int y = 0; y < int'(N_Y); y++)
      for (int x = 0; x < int'(N_X); x++) begin
        int n;
        n = y * int'(N_X) + x;
        for (int p = 0; p < int'(NP); p++) begin
          n_out_ready[n][p] = '0;
          n_up[n][p]        = 1'b0;
          n_dead[n][p]      = 1'b0;
          if (p < int'(N_X)) begin
            if (p != x) begin
              n_out_ready[n][p] = n_in_ready[y * int'(N_X) + p][x];
              n_up[n][p]        = npu_link_up[n][p] && npu_link_up[y * int'(N_X) + p][x];
              n_dead[n][p]      = backup_active && failed_off == 6'(y * 8 + p);
            end
          end else if (p - int'(N_X) != y) begin
            n_out_ready[n][p] = n_in_ready[(p - int'(N_X)) * int'(N_X) + x][int'(N_X) + y];
            n_up[n][p]        = npu_link_up[n][p] &&
                                npu_link_up[(p - int'(N_X)) * int'(N_X) + x][int'(N_X) + y];
            n_dead[n][p]      = backup_active && failed_off == 6'((p - int'(N_X)) * 8 + x);
          end else begin
            n_out_ready[n][p] = l_in_ready[n];
            n_up[n][p]        = npu_link_up[n][p];
          end
        end
      end
    for (int p = 0; p < int'(NP); p++) begin
      n_out_ready[NN][p] = (p == int'(N_X)) ? l_in_ready[NN] : '0;
      n_up[NN][p]        = (p == int'(N_X));
      n_dead[NN][p]      = 1'b0;
    end
    for (int n = 0; n < int'(NN); n++) begin
      l_out_ready[n] = n_in_ready[n][int'(N_X) + n / int'(N_X)];
      l_up[n]        = npu_link_up[n][int'(N_X) + n / int'(N_X)];
      l_dead[n]      = backup_active && failed_off == 6'((n / int'(N_X)) * 8 + n % int'(N_X));
    end
    l_out_ready[NN] = n_in_ready[NN][N_X];
    l_up[NN]        = 1'b1;
    l_dead[NN]      = 1'b0;
    for (int e = 0; e < int'(NE); e++) begin
      l_out_ready[NN + 1 + e] = ext_out_ready[e];
      l_up[NN + 1 + e]        = ext_link_up[e];
      l_dead[NN + 1 + e]      = 1'b0;
    end
  end

  // ---------------- NPUs ----------------
  for (genvar n = 0; n <= NN; n++) begin : g_npu
    localparam bit          IS_BK = (n == NN);
    localparam int unsigned NX    = IS_BK ? 0 : n % N_X;
    localparam int unsigned NY    = IS_BK ? 0 : n / N_X;
    ub_addr_t addr;
    assign addr = IS_BK ? ub_addr_t'({pod_id, 2'(MY_ROW), 2'(MY_COL), failed_off})
                        : ub_addr_t'({pod_id, 2'(MY_ROW), 2'(MY_COL), 3'(NY), 3'(NX)});
    npu_ub_ctrl #(
      .N_X(N_X), .N_Y(N_Y), .MY_X(NX), .MY_Y(NY), .BACKUP(IS_BK),
      .NODE_ID(IS_BK ? NODE_BACKUP : 7'(NY * 8 + NX)), .DEPTH(DEPTH)
    ) u_npu (
      .clk, .rst_n, .own_addr(addr),
      .local_en(IS_BK ? backup_active : 1'b1),
      .cfg,
      .link_up(n_up[n]), .dead_in(n_dead[n]),
      .net_in_valid(n_in_valid[n]), .net_in_flit(n_in_flit[n]), .net_in_ready(n_in_ready[n]),
      .net_out_valid(n_out_valid[n]), .net_out_flit(n_out_flit[n]), .net_out_ready(n_out_ready[n]),
      .core_tx_valid(core_tx_valid[n]), .core_tx_dst(core_tx_dst[n]),
      .core_tx_flow(core_tx_flow[n]), .core_tx_sr(core_tx_sr[n]),
      .core_tx_payload(core_tx_payload[n]), .core_tx_ready(core_tx_ready[n]),
      .core_rx_valid(core_rx_valid[n]), .core_rx_flit(core_rx_flit[n]),
      .core_rx_ready(core_rx_ready[n]),
      .ev_sr(e_sr[n]), .ev_redir(e_redir[n]), .ev_notify_tx(e_ntx[n]), .ev_notify_rx(e_nrx[n])
    );
  end

  // ---------------- LRS plane ----------------
  logic lrs_sr, lrs_redir;
  lrs_plane #(
    .N_X(N_X), .N_Y(N_Y), .RR(RR), .RC(RC), .MY_ROW(MY_ROW), .MY_COL(MY_COL), .DEPTH(DEPTH)
  ) u_lrs (
    .clk, .rst_n,
    .own_addr(ub_addr_t'({pod_id, 2'(MY_ROW), 2'(MY_COL), 6'd0})),
    .cfg, .link_up(l_up), .dead_in(l_dead),
    .net_in_valid(l_in_valid), .net_in_flit(l_in_flit), .net_in_ready(l_in_ready),
    .net_out_valid(l_out_valid), .net_out_flit(l_out_flit), .net_out_ready(l_out_ready),
    .ev_sr(lrs_sr), .ev_redir(lrs_redir), .ev_backup(ev_backup)
  );

  always_comb begin
    for (int e = 0; e < int'(NE); e++) begin
      ext_in_ready[e]  = l_in_ready[NN + 1 + e];
      ext_out_valid[e] = l_out_valid[NN + 1 + e];
      ext_out_flit[e]  = l_out_flit[NN + 1 + e];
    end
  end

  assign ev_sr        = (|e_sr) || lrs_sr;
  assign ev_redir     = (|e_redir) || lrs_redir;
  assign ev_notify_tx = |e_ntx;
  assign ev_notify_rx = |e_nrx;
endmodule
