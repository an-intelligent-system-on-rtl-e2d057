// som_neuron: one SOM output neuron.
//
// Computes the squared Euclidean distance sum_j (x_j - m_ij)^2 between the
// registered input sample and the neuron's weight vector, and outputs it
// concatenated with the neuron's pointer (its index i), as the tree comparer
// expects: out = {distance, index}. The weights are constants of the neuron
// (a small ROM that synthesis folds into the subtractors), given by the
// WEIGHTS parameter. N distance modules (2 cycles) feed an adder tree
// (ceil(log2 N) cycles), so out is valid 2 + ceil(log2 N) edges after x.
// The structure (distance modules, tree adder, pointer, per-neuron weight
// ROM) is the published one; widths follow from exact arithmetic.
module som_neuron #(
  parameter int unsigned N      = 4,
  parameter int unsigned W      = 8,
  parameter int unsigned IDX_W  = 7,
  parameter int unsigned INDEX  = 0,
  parameter int unsigned DIST_W = 2 * W + ((N > 1) ? $clog2(N) : 0),
  parameter logic [N-1:0][W-1:0] WEIGHTS = '0
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [N-1:0][W-1:0]     x,
  output logic [DIST_W+IDX_W-1:0] out
);

  logic [N-1:0][2*W-1:0] sq;
  logic [DIST_W-1:0]     dsum;

  for (genvar j = 0; j < N; j++) begin : g_dist
    som_sqdiff #(.W(W)) u_sqdiff (
      .clk(clk), .rst(rst), .x(x[j]), .w(WEIGHTS[j]), .sq(sq[j])
    );
  end

  som_adder_tree #(.N(N), .IN_W(2 * W), .OUT_W(DIST_W)) u_adder (
    .clk(clk), .rst(rst), .terms(sq), .sum(dsum)
  );

  assign out = {dsum, IDX_W'(INDEX)};

endmodule
