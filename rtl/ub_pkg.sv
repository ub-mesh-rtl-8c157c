// ub_pkg: types and constants shared by the UB-Mesh router RTL.
//
// A packet travels as a single flit. The flit carries the 8-byte source
// routing (SR) header laid out byte for byte as the UB-Mesh SR header:
// byte 0 holds ptr in bits 3:0 and the low four bitmap bits in bits 7:4,
// byte 1 the upper eight bitmap bits, bytes 2..7 instruction[0..5].
// Addresses are structured by physical location, most significant segment
// first: Pod, rack row, rack column, board, NPU on the board.
// The field widths of the address, the instruction encoding, the flit's
// other fields and the management bus are choices of this implementation.
package ub_pkg;

  // ---------------- source routing header ----------------
  localparam int unsigned SR_BITMAP_W = 12;  // hops described by the bitmap
  localparam int unsigned SR_PTR_W    = 4;   // hop pointer
  localparam int unsigned SR_N_INSTR  = 6;   // instruction fields
  localparam int unsigned SR_INSTR_W  = 8;   // one byte each

  typedef struct packed {
    logic [SR_N_INSTR-1:0][SR_INSTR_W-1:0] instr;   // bytes 7..2 = instruction[5..0]
    logic [SR_BITMAP_W-1:0]                bitmap;  // {byte1, byte0[7:4]}
    logic [SR_PTR_W-1:0]                   ptr;     // byte0[3:0]
  } sr_hdr_t;                                       // 64 bits

  // An SR instruction: virtual lane for the next hop and the output port.
  typedef struct packed {
    logic       vl;
    logic [6:0] port;
  } sr_instr_t;

  // ---------------- virtual lanes ----------------
  localparam int unsigned N_VL = 2;

  // ---------------- structured address ----------------
  typedef struct packed {
    logic [2:0] pod;    // Pod inside the SuperPod
    logic [1:0] rrow;   // rack row inside the Pod
    logic [1:0] rcol;   // rack column inside the Pod
    logic [2:0] y;      // board inside the rack (Y full mesh)
    logic [2:0] x;      // NPU on the board (X full mesh)
  } ub_addr_t;          // 13 bits

  localparam int unsigned NPU_SEG  = 64;  // linear offsets {y,x}
  localparam int unsigned RACK_SEG = 16;  // linear offsets {rrow,rcol}
  localparam int unsigned POD_SEG  = 8;   // linear offsets pod

  // Routing table entry: VL for the next hop and the output port.
  typedef struct packed {
    logic       vl;
    logic [6:0] port;
  } rt_entry_t;

  typedef enum logic [1:0] {
    TBL_NPU  = 2'd0,
    TBL_RACK = 2'd1,
    TBL_POD  = 2'd2
  } tbl_sel_e;

  // ---------------- flit ----------------
  typedef enum logic [1:0] {
    PKT_DATA   = 2'd0,
    PKT_NOTIFY = 2'd1    // direct link-failure notification
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e   typ;
    logic        vl;
    ub_addr_t    dst;
    ub_addr_t    src;
    sr_hdr_t     sr;
    logic [31:0] payload;
  } flit_t;

  // Payload of a notification: which path of which flow is broken.
  typedef struct packed {
    logic [23:0] rsvd;
    logic [1:0]  flow;
    logic [1:0]  path;
    logic [3:0]  link_port;
  } notify_pl_t;

  // ---------------- management (configuration) bus ----------------
  typedef enum logic [2:0] {
    CFG_TABLE  = 3'd0,  // index = {sel[1:0], off[5:0]}, data[7:0] = rt_entry_t
    CFG_PATH   = 3'd1,  // index = {flow[1:0], path[1:0]}, data = sr_hdr_t, marks path valid
    CFG_NOTIFY = 3'd2,  // index = {port[3:0], slot[0]}, data = {valid, target, flow, path}
    CFG_FAIL   = 3'd3   // rack level: data[6] = backup active, data[5:0] = failed NPU offset
  } cfg_kind_e;

  localparam logic [6:0] NODE_BACKUP = 7'd64;
  localparam logic [6:0] NODE_LRS    = 7'd65;
  localparam logic [6:0] NODE_RACK   = 7'd66;

  typedef struct packed {
    logic        valid;
    logic [3:0]  rack;   // {rrow, rcol}
    logic [6:0]  node;   // 0..63 NPU {y,x}, NODE_BACKUP, NODE_LRS, NODE_RACK
    cfg_kind_e   kind;
    logic [7:0]  index;
    logic [63:0] data;
  } cfg_t;

  // Notification table entry (CFG_NOTIFY data[19:0]).
  typedef struct packed {
    logic     valid;
    ub_addr_t target;
    logic [1:0] flow;
    logic [1:0] path;
  } notify_ent_t;  // 18 bits

endpackage
