// rr_arbiter: round-robin arbiter. Grants the first requester at or after
// the rotating pointer; the pointer moves past the winner when `advance` is
// high. Grant is combinational from req; the pointer is the only state.
module rr_arbiter #(
  parameter  int unsigned N = 4,
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic                 gnt_valid,
  output logic [W-1:0]         gnt_idx
);
  logic [W-1:0] ptr;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int i = N - 1; i >= 0; i--)
      if (req[i]) begin gnt_valid = 1'b1; gnt_idx = W'(i); end
    for (int i = N - 1; i >= 0; i--)
      if (req[i] && i >= int'(ptr)) begin gnt_valid = 1'b1; gnt_idx = W'(i); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      ptr <= '0;
    else if (advance && gnt_valid)   ptr <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end
endmodule
