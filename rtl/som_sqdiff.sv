// som_sqdiff: the distance module of a neuron, (x - w)^2 for one feature.
//
// Two pipeline stages, matching the two clock cycles the distance
// computation takes: stage 1 registers |x - w| (W bits, since both operands
// are unsigned), stage 2 registers its square (2W bits, exact). Output sq is
// valid two rising edges after x and w are presented. rst (synchronous,
// active high) clears both stages. Taking the absolute difference before
// squaring is this design's choice; it keeps the multiplier unsigned and
// W x W bits wide.
module som_sqdiff #(
  parameter int unsigned W = 8
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   w,
  output logic [2*W-1:0] sq
);

  logic [W-1:0] diff_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      diff_q <= '0;
      sq     <= '0;
    end else begin
      diff_q <= (x >= w) ? (x - w) : (w - x);
      sq     <= diff_q * diff_q;
    end
  end

endmodule
