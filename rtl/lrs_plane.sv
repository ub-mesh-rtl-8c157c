// lrs_plane: the back-plane switch plane of one UB-Mesh rack.
//
// In hardware a rack holds 18 fully connected low-radix switches (LRS):
// eight serve the regular NPUs, two the CPUs and the backup NPU, eight the
// links to other racks. Because they are fully connected and non-blocking
// they act as one switch; this block models the plane as a single ub_router
// with these ports:
//   0 .. NN-1             one link to each regular NPU, port y*N_X + x
//   NN                    the backup NPU
//   NN+1 .. NN+RC         rack-row links, port NN+1+c to rack (MY_ROW, c);
//                         the slot of the own column (c = MY_COL) is the
//                         port to the CPU boards
//   NN+1+RC .. NN+RC+RR   rack-column links, port NN+1+RC+r to rack
//                         (r, MY_COL); the slot of the own row is the
//                         uplink to the Pod switches (HRS)
// Default routing: an NPU of this rack goes straight to its port; another
// rack first along the row, then along the column (one LRS-LRS hop per
// dimension); another Pod to the HRS uplink. The LRS takes part in source
// routing like every UB router.
// Faults: dead_in marks the port of a failed NPU; its traffic goes to the
// backup NPU port. A dead rack link falls back to the HRS uplink.
// Timing: one cycle per hop, as ub_router.
//
// The switch counts, roles and the 4x4 rack grid follow UB-Mesh; merging the
// 18 switches into one router and the port numbering are this design's.
module lrs_plane
  import ub_pkg::*;
#(
  parameter int unsigned N_X     = 8,
  parameter int unsigned N_Y     = 8,
  parameter int unsigned RR      = 4,
  parameter int unsigned RC      = 4,
  parameter int unsigned MY_ROW  = 0,
  parameter int unsigned MY_COL  = 0,
  parameter int unsigned DEPTH   = 2,
  localparam int unsigned NN     = N_X * N_Y,
  localparam int unsigned NPORTS = NN + 1 + RC + RR
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  ub_addr_t                     own_addr,
  input  cfg_t                         cfg,
  input  logic [NPORTS-1:0]            link_up,
  input  logic [NPORTS-1:0]            dead_in,
  input  logic  [NPORTS-1:0]           net_in_valid,
  input  flit_t [NPORTS-1:0]           net_in_flit,
  output logic  [NPORTS-1:0][N_VL-1:0] net_in_ready,
  output logic  [NPORTS-1:0]           net_out_valid,
  output flit_t [NPORTS-1:0]           net_out_flit,
  input  logic  [NPORTS-1:0][N_VL-1:0] net_out_ready,
  output logic                         ev_sr,
  output logic                         ev_redir,
  output logic                         ev_backup   // a flit was sent to the backup NPU
);
  localparam int unsigned P_BACKUP = NN;
  localparam int unsigned P_ROW0   = NN + 1;
  localparam int unsigned P_COL0   = NN + 1 + RC;
  localparam int unsigned P_HRS    = P_COL0 + MY_ROW;

  logic cfg_me;
  assign cfg_me = cfg.valid && cfg.rack == {own_addr.rrow, own_addr.rcol} &&
                  cfg.node == NODE_LRS;

  rt_entry_t [NPU_SEG-1:0]  dflt_npu;
  rt_entry_t [RACK_SEG-1:0] dflt_rack;
  rt_entry_t [POD_SEG-1:0]  dflt_pod;

  always_comb begin
    for (int i = 0; i < NPU_SEG; i++) begin
      dflt_npu[i].vl = 1'b0;
      if ((i % 8) < int'(N_X) && (i / 8) < int'(N_Y))
        dflt_npu[i].port = 7'((i / 8) * int'(N_X) + (i % 8));
      else
        dflt_npu[i].port = 7'(P_HRS);
    end
    for (int i = 0; i < RACK_SEG; i++) begin
      int rr, rc;
      rr = i / 4;
      rc = i % 4;
      dflt_rack[i].vl = 1'b0;
      if (rr >= int'(RR) || rc >= int'(RC)) dflt_rack[i].port = 7'(P_HRS);
      else if (rc != int'(MY_COL))         dflt_rack[i].port = 7'(int'(P_ROW0) + rc);
      else if (rr != int'(MY_ROW))         dflt_rack[i].port = 7'(int'(P_COL0) + rr);
      else                                 dflt_rack[i].port = 7'(P_HRS);
    end
    for (int i = 0; i < POD_SEG; i++) dflt_pod[i] = '{vl: 1'b0, port: 7'(P_HRS)};
  end

  logic [NPORTS-1:0]      dead;
  logic [NPORTS-1:0][6:0] alt;
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      dead[p] = dead_in[p] || !link_up[p];
      alt[p]  = (p < int'(NN)) ? 7'(P_BACKUP) : 7'(P_HRS);
    end
  end

  logic [NPORTS-1:0] r_sr, r_redir;

  ub_router #(.NPORTS(NPORTS), .DEPTH(DEPTH), .LOCAL_PORT(0), .HAS_LOCAL(1'b0)) u_router (
    .clk, .rst_n, .own_addr, .local_en(1'b0), .dead, .alt_port(alt),
    .dflt_npu, .dflt_rack, .dflt_pod,
    .tbl_wr_en  (cfg_me && cfg.kind == CFG_TABLE),
    .tbl_wr_sel (tbl_sel_e'(cfg.index[7:6])),
    .tbl_wr_idx (cfg.index[5:0]),
    .tbl_wr_data(rt_entry_t'(cfg.data[7:0])),
    .in_valid(net_in_valid), .in_flit(net_in_flit), .in_ready(net_in_ready),
    .out_valid(net_out_valid), .out_flit(net_out_flit), .out_ready(net_out_ready),
    .out_sr(r_sr), .out_redir(r_redir)
  );

  assign ev_sr     = |r_sr;
  assign ev_redir  = |r_redir;
  assign ev_backup = net_out_valid[P_BACKUP];
endmodule
