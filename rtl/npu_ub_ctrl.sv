// npu_ub_ctrl: the routing side of one NPU's UB IO controllers.
//
// Every NPU in UB-Mesh is also a router. This block joins a 16-port
// ub_router with the NPU's source-routing and fault-handling logic:
//   ports 0..N_X-1        X full mesh, port i leads to NPU i on the same
//                         board; port MY_X (the NPU itself) is the local port
//   ports N_X..N_X+N_Y-1  Y full mesh, port N_X+j leads to the NPU in the
//                         same position on board j; port N_X+MY_Y (the own
//                         board) is the uplink to the rack's LRS plane
// So 7 X links, 7 Y links, one LRS link and the local port for N_X = N_Y = 8.
//
// Injection: the compute core offers a packet (core_tx_*) for a destination
// and a flow; with core_tx_sr set, apr_path_select supplies the source
// route of the next valid path of that flow. Notifications from
// fault_notify are injected first. All injected flits start on VL 0.
// Ejection: data packets go to core_rx_*; notification packets are consumed
// here and invalidate the named path in apr_path_select.
// Faults: a port is dead when its link is down (link_up low) or when the
// rack marks its neighbour as a failed NPU (dead_in); traffic for a dead
// port goes to the LRS uplink instead.
// Management: cfg is the rack's configuration bus, decoded for node NODE_ID
// of the rack given by own_addr (tables, paths, notification targets).
// Reset defaults of the routing table: X first, then Y inside the rack, the
// LRS uplink for everything outside; BACKUP sends everything to the uplink.
//
// Network ports are arrays over all NPORTS ports; the entries of the local
// port are not used (net_in_*) or driven idle (net_out_*).
//
// The port layout (7+7 mesh links plus a switch link per NPU), the routing
// ability of the NPU and the redirection to the LRS follow UB-Mesh; the
// port numbering, default tables and core interface are this design's.
module npu_ub_ctrl
  import ub_pkg::*;
#(
  parameter int unsigned N_X     = 8,
  parameter int unsigned N_Y     = 8,
  parameter int unsigned MY_X    = 0,
  parameter int unsigned MY_Y    = 0,
  parameter bit          BACKUP  = 1'b0,
  parameter logic [6:0]  NODE_ID = 7'd0,
  parameter int unsigned DEPTH   = 2,
  parameter int unsigned FLOWS   = 4,
  parameter int unsigned PATHS   = 4,
  parameter int unsigned SLOTS   = 2,
  localparam int unsigned NPORTS = N_X + N_Y
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  ub_addr_t                     own_addr,
  input  logic                         local_en,
  input  cfg_t                         cfg,
  input  logic [NPORTS-1:0]            link_up,
  input  logic [NPORTS-1:0]            dead_in,
  // network links
  input  logic  [NPORTS-1:0]           net_in_valid,
  input  flit_t [NPORTS-1:0]           net_in_flit,
  output logic  [NPORTS-1:0][N_VL-1:0] net_in_ready,
  output logic  [NPORTS-1:0]           net_out_valid,
  output flit_t [NPORTS-1:0]           net_out_flit,
  input  logic  [NPORTS-1:0][N_VL-1:0] net_out_ready,
  // compute core side
  input  logic                         core_tx_valid,
  input  ub_addr_t                     core_tx_dst,
  input  logic [1:0]                   core_tx_flow,
  input  logic                         core_tx_sr,
  input  logic [31:0]                  core_tx_payload,
  output logic                         core_tx_ready,
  output logic                         core_rx_valid,
  output flit_t                        core_rx_flit,
  input  logic                         core_rx_ready,
  // events, one pulse per cycle in which they happened
  output logic                         ev_sr,
  output logic                         ev_redir,
  output logic                         ev_notify_tx,
  output logic                         ev_notify_rx
);
  localparam int unsigned LOCAL  = MY_X;
  localparam int unsigned UPLINK = N_X + MY_Y;

  // ---------------- configuration decode ----------------
  logic cfg_me;
  assign cfg_me = cfg.valid && cfg.rack == {own_addr.rrow, own_addr.rcol} &&
                  cfg.node == NODE_ID;

  // ---------------- default routing tables ----------------
  rt_entry_t [NPU_SEG-1:0]  dflt_npu;
  rt_entry_t [RACK_SEG-1:0] dflt_rack;
  rt_entry_t [POD_SEG-1:0]  dflt_pod;

  always_comb begin
    for (int i = 0; i < NPU_SEG; i++) begin
      int tx, ty;
      tx = i % 8;
      ty = i / 8;
      dflt_npu[i].vl = 1'b0;
      if (BACKUP || tx >= int'(N_X) || ty >= int'(N_Y)) dflt_npu[i].port = 7'(UPLINK);
      else if (tx != int'(MY_X))                        dflt_npu[i].port = 7'(tx);
      else if (ty != int'(MY_Y))                        dflt_npu[i].port = 7'(int'(N_X) + ty);
      else                                              dflt_npu[i].port = 7'(LOCAL);
    end
    for (int i = 0; i < RACK_SEG; i++) dflt_rack[i] = '{vl: 1'b0, port: 7'(UPLINK)};
    for (int i = 0; i < POD_SEG; i++)  dflt_pod[i]  = '{vl: 1'b0, port: 7'(UPLINK)};
  end

  // ---------------- router ----------------
  logic  [NPORTS-1:0]           r_in_valid, r_out_valid, r_sr, r_redir;
  flit_t [NPORTS-1:0]           r_in_flit, r_out_flit;
  logic  [NPORTS-1:0][N_VL-1:0] r_in_ready, r_out_ready;
  logic  [NPORTS-1:0]           dead;
  logic  [NPORTS-1:0][6:0]      alt;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      dead[p] = (p != int'(LOCAL)) && (dead_in[p] || !link_up[p]);
      alt[p]  = 7'(UPLINK);
    end
  end

  // injection mux
  logic    ps_valid;
  sr_hdr_t ps_hdr;
  logic [1:0] ps_path;
  logic    nf_valid;
  flit_t   nf_flit;
  flit_t   core_flit;

  always_comb begin
    core_flit         = '0;
    core_flit.typ     = PKT_DATA;
    core_flit.vl      = 1'b0;
    core_flit.dst     = core_tx_dst;
    core_flit.src     = own_addr;
    core_flit.sr      = (core_tx_sr && ps_valid) ? ps_hdr : '0;
    core_flit.payload = core_tx_payload;

    r_in_valid  = net_in_valid;
    r_in_flit   = net_in_flit;
    r_in_valid[LOCAL] = (nf_valid || core_tx_valid) && r_in_ready[LOCAL][0];
    r_in_flit[LOCAL]  = nf_valid ? nf_flit : core_flit;

    r_out_ready = net_out_ready;
    r_out_ready[LOCAL] = {N_VL{core_rx_ready}};

    net_in_ready = r_in_ready;
    net_in_ready[LOCAL] = '0;
    net_out_valid = r_out_valid;
    net_out_valid[LOCAL] = 1'b0;
    net_out_flit = r_out_flit;
    net_out_flit[LOCAL] = '0;
  end

  assign core_tx_ready = r_in_ready[LOCAL][0] && !nf_valid;

  ub_router #(.NPORTS(NPORTS), .DEPTH(DEPTH), .LOCAL_PORT(LOCAL), .HAS_LOCAL(1'b1)) u_router (
    .clk, .rst_n, .own_addr, .local_en, .dead, .alt_port(alt),
    .dflt_npu, .dflt_rack, .dflt_pod,
    .tbl_wr_en  (cfg_me && cfg.kind == CFG_TABLE),
    .tbl_wr_sel (tbl_sel_e'(cfg.index[7:6])),
    .tbl_wr_idx (cfg.index[5:0]),
    .tbl_wr_data(rt_entry_t'(cfg.data[7:0])),
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_ready(r_out_ready),
    .out_sr(r_sr), .out_redir(r_redir)
  );

  // ejection
  logic       rx_notify;
  notify_pl_t rx_pl;
  assign rx_notify     = r_out_valid[LOCAL] && r_out_flit[LOCAL].typ == PKT_NOTIFY;
  assign rx_pl         = notify_pl_t'(r_out_flit[LOCAL].payload);
  assign core_rx_valid = r_out_valid[LOCAL] && r_out_flit[LOCAL].typ != PKT_NOTIFY;
  assign core_rx_flit  = r_out_flit[LOCAL];

  // ---------------- source paths ----------------
  apr_path_select #(.FLOWS(FLOWS), .PATHS(PATHS)) u_paths (
    .clk, .rst_n,
    .cfg_en   (cfg_me && cfg.kind == CFG_PATH),
    .cfg_clear(cfg.index[4]),
    .cfg_flow (cfg.index[3:2]),
    .cfg_path (cfg.index[1:0]),
    .cfg_hdr  (sr_hdr_t'(cfg.data)),
    .notify_valid(rx_notify),
    .notify_flow (rx_pl.flow),
    .notify_path (rx_pl.path),
    .req_flow (core_tx_flow),
    .take     (core_tx_valid && core_tx_ready && core_tx_sr),
    .hdr_valid(ps_valid), .hdr(ps_hdr), .sel_path(ps_path)
  );

  // ---------------- failure notification ----------------
  fault_notify #(.NPORTS(NPORTS), .SLOTS(SLOTS)) u_notify (
    .clk, .rst_n, .own_addr, .link_up,
    .cfg_en  (cfg_me && cfg.kind == CFG_NOTIFY),
    .cfg_port(cfg.index[4:1]),
    .cfg_slot(cfg.index[0]),
    .cfg_ent (notify_ent_t'(cfg.data[17:0])),
    .out_valid(nf_valid), .out_flit(nf_flit), .out_ready(r_in_ready[LOCAL][0])
  );

  assign ev_sr        = |r_sr;
  assign ev_redir     = |r_redir;
  assign ev_notify_tx = nf_valid && r_in_ready[LOCAL][0];
  assign ev_notify_rx = rx_notify;
endmodule
