// vl_fifo: input buffer of one router port, one FIFO per virtual lane.
//
// A flit arriving with in_valid is written into the FIFO of the lane named
// by its vl field. in_ready[v] is high while lane v has room; the sender may
// only present a flit on lane v when in_ready[v] is high (asserted below).
// Each lane shows its oldest flit on head_flit[v]/head_valid[v]; pop[v]
// removes it. A flit written in one cycle is visible at the head in the
// next, so a router built from these buffers takes one cycle per hop.
// Because in_ready depends only on the stored count, there is no
// combinational path from pop to in_ready.
//
// UB-Mesh uses two virtual lanes; the depth (2 flits per lane, enough for
// one flit per cycle) and the ready-based flow control are this
// implementation's choices.
module vl_fifo
  import ub_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  flit_t                in_flit,
  output logic [N_VL-1:0]      in_ready,
  output logic [N_VL-1:0]      head_valid,
  output flit_t [N_VL-1:0]     head_flit,
  input  logic [N_VL-1:0]      pop
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t            mem   [N_VL][DEPTH];
  logic [AW-1:0]    rd_ptr[N_VL];
  logic [AW-1:0]    wr_ptr[N_VL];
  logic [AW:0]      count [N_VL];

  for (genvar v = 0; v < N_VL; v++) begin : g_vl
    logic push;
    assign push          = in_valid && (in_flit.vl == 1'(v)) && in_ready[v];
    assign in_ready[v]   = (count[v] != (AW+1)'(DEPTH));
    assign head_valid[v] = (count[v] != '0);
    assign head_flit[v]  = mem[v][rd_ptr[v]];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end else begin
        if (push) begin
          mem[v][wr_ptr[v]] <= in_flit;
          wr_ptr[v] <= (wr_ptr[v] == AW'(DEPTH-1)) ? '0 : wr_ptr[v] + 1'b1;
        end
        if (pop[v] && head_valid[v])
          rd_ptr[v] <= (rd_ptr[v] == AW'(DEPTH-1)) ? '0 : rd_ptr[v] + 1'b1;
        count[v] <= count[v] + (AW+1)'(push) - (AW+1)'(pop[v] && head_valid[v]);
      end
    end

`ifndef SYNTHESIS
    // A sender never writes a full lane.
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_valid && in_flit.vl == 1'(v) && !in_ready[v]));
`endif
  end
endmodule
