// apr_path_select: source side of All-Path Routing.
//
// For each of FLOWS flows (a flow is a stream of packets to one peer, as
// set up by the communication library) the table holds up to PATHS source
// routing headers, each describing one path to the peer, and a valid bit per
// path. A packet of flow f gets the header of the first valid path at or
// after the flow's round-robin pointer, so consecutive packets spread over
// all valid paths; `take` consumes the choice and moves the pointer on.
// A direct failure notification (notify_valid) clears the valid bit of the
// path it names, so traffic switches to the remaining paths from the next
// packet on. If no path of a flow is valid, hdr_valid is low and the packet
// is sent with an all-zero header, i.e. routed hop by hop by the tables.
//
// Management writes a path with cfg_en (which also marks it valid) or
// invalidates it with cfg_clear. Both take effect the next cycle; selection
// is combinational.
//
// Spreading over all paths and path switching on notification follow
// UB-Mesh's APR and direct notification; the per-flow table, its sizes and
// the round-robin spreading are this implementation's choices.
module apr_path_select
  import ub_pkg::*;
#(
  parameter int unsigned FLOWS = 4,
  parameter int unsigned PATHS = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_en,
  input  logic                      cfg_clear,
  input  logic [1:0]                cfg_flow,
  input  logic [1:0]                cfg_path,
  input  sr_hdr_t                   cfg_hdr,
  input  logic                      notify_valid,
  input  logic [1:0]                notify_flow,
  input  logic [1:0]                notify_path,
  input  logic [1:0]                req_flow,
  input  logic                      take,
  output logic                      hdr_valid,
  output sr_hdr_t                   hdr,
  output logic [1:0]                sel_path
);
  sr_hdr_t                paths [FLOWS][PATHS];
  logic [FLOWS-1:0][PATHS-1:0] pvalid;
  logic [FLOWS-1:0][1:0]  rr;

  logic [1:0] f;
  assign f = 2'(int'(req_flow) % FLOWS);

  always_comb begin
    hdr_valid = 1'b0;
    sel_path  = '0;
    for (int k = PATHS - 1; k >= 0; k--) begin
      // candidate order: rr, rr+1, ... (circular); scan backwards so the
      // earliest candidate wins
      int c;
      c = (int'(rr[f]) + k) % PATHS;
      if (pvalid[f][c]) begin hdr_valid = 1'b1; sel_path = 2'(c); end
    end
    hdr = hdr_valid ? paths[f][sel_path % PATHS] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pvalid <= '0;
      rr     <= '0;
    end else begin
      if (take && hdr_valid) rr[f] <= 2'((int'(sel_path) + 1) % PATHS);
      if (notify_valid && int'(notify_flow) < FLOWS && int'(notify_path) < PATHS)
        pvalid[notify_flow][notify_path] <= 1'b0;
      if (cfg_en && int'(cfg_flow) < FLOWS && int'(cfg_path) < PATHS) begin
        pvalid[cfg_flow][cfg_path] <= !cfg_clear;
      end
    end
  end

  always_ff @(posedge clk)
    if (cfg_en && !cfg_clear && int'(cfg_flow) < FLOWS && int'(cfg_path) < PATHS)
      paths[cfg_flow][cfg_path] <= cfg_hdr;
endmodule
