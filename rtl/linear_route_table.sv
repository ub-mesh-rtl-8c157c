// linear_route_table: structured-address routing table with linear lookup.
//
// The address space is split by physical location into segments (Pod,
// rack, NPU within the rack). A router compares the destination with its
// own address from the top segment down; at the first segment that differs
// it indexes a small table with the destination's linear offset inside that
// segment: the Pod number, the rack number {row,col}, or the NPU number
// {board,npu}. No prefix matching and no per-destination table across the
// whole system are needed: 64 + 16 + 8 entries cover a SuperPod.
//
// Lookup is combinational on NRD read ports. One write port lets the
// management system rewrite an entry (takes effect the next cycle). At reset
// every entry loads the default given on the dflt_* inputs, which the
// instantiating router computes from its position.
//
// The segment idea follows UB-Mesh's structured addressing; the field widths,
// the entry format {vl, port} and the reset-default mechanism are choices of
// this implementation.
module linear_route_table
  import ub_pkg::*;
#(
  parameter int unsigned NRD = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ub_addr_t          own_addr,
  // defaults loaded at reset
  input  rt_entry_t [NPU_SEG-1:0]  dflt_npu,
  input  rt_entry_t [RACK_SEG-1:0] dflt_rack,
  input  rt_entry_t [POD_SEG-1:0]  dflt_pod,
  // management write
  input  logic              wr_en,
  input  tbl_sel_e          wr_sel,
  input  logic [5:0]        wr_idx,
  input  rt_entry_t         wr_data,
  // lookups
  input  ub_addr_t  [NRD-1:0] rd_dst,
  output rt_entry_t [NRD-1:0] rd_entry
);
  rt_entry_t npu_tbl  [NPU_SEG];
  rt_entry_t rack_tbl [RACK_SEG];
  rt_entry_t pod_tbl  [POD_SEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPU_SEG; i++)  npu_tbl[i]  <= dflt_npu[i];
      for (int i = 0; i < RACK_SEG; i++) rack_tbl[i] <= dflt_rack[i];
      for (int i = 0; i < POD_SEG; i++)  pod_tbl[i]  <= dflt_pod[i];
    end else if (wr_en) begin
      unique case (wr_sel)
        TBL_NPU:  npu_tbl[wr_idx]       <= wr_data;
        TBL_RACK: rack_tbl[wr_idx[3:0]] <= wr_data;
        TBL_POD:  pod_tbl[wr_idx[2:0]]  <= wr_data;
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) begin
      if (rd_dst[r].pod != own_addr.pod)
        rd_entry[r] = pod_tbl[rd_dst[r].pod];
      else if ({rd_dst[r].rrow, rd_dst[r].rcol} != {own_addr.rrow, own_addr.rcol})
        rd_entry[r] = rack_tbl[{rd_dst[r].rrow, rd_dst[r].rcol}];
      else
        rd_entry[r] = npu_tbl[{rd_dst[r].y, rd_dst[r].x}];
    end
  end
endmodule
