// som_tree_comparer: recursive tree comparer that finds the best-matching unit.
//
// Input u is the array of M neuron outputs, each {distance, index}. Instead
// of a binary tree of M-1 comparators, the comparer has P = ceil(M/2) compare
// cells, each a "<" comparator, a 2:1 selector and a register, and folds the
// array onto itself:
//   * ini = 0 (with ce = 1): cell j compares u[2j] and u[2j+1] and stores the
//     smaller entry; a missing u[M] (M odd) reads as all ones.
//   * ini = 1 (with ce = 1): cell j compares registers r[2j] and r[2j+1];
//     cells whose partners lie beyond r[P-1] read all ones, so the upper half
//     of the registers fills with ones while the lower half keeps the minima.
// After the ini = 0 step and ceil(log2 M) - 1 further ini = 1 steps, r[0]
// holds the minimum distance and its neuron index (output p), which then
// stays put under further ini = 1 steps. With ce = 0 the registers hold.
// Only the distance field is compared; on equal distances the entry with the
// lower index is kept, so the result equals the first minimum of the array.
// The cell count, the ini-controlled selectors, the all-ones padding and the
// step count are the published design; the tie rule, the 0-based index and
// the ce enable are this design's choices. When M is odd the last cell
// compares against a constant all-ones partner, as the padded cells of the
// published scheme do; lint reports that comparison as constant. rst is
// synchronous, active high.
module som_tree_comparer #(
  parameter int unsigned M      = 121,
  parameter int unsigned DIST_W = 18,
  parameter int unsigned IDX_W  = 7
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           ce,
  input  logic                           ini,
  input  logic [M-1:0][DIST_W+IDX_W-1:0] u,
  output logic [DIST_W-1:0]              min_dist,
  output logic [IDX_W-1:0]               min_idx
);

  localparam int unsigned E = DIST_W + IDX_W;   // entry width
  localparam int unsigned P = (M + 1) / 2;      // compare cells

  logic [E-1:0] r [P];

  for (genvar j = 0; j < P; j++) begin : g_cell
    logic [E-1:0] a, b, a_init, b_init, a_loop, b_loop;

    // Selector inputs when ini = 0: the neuron outputs.
    assign a_init = u[2*j];
    if (2 * j + 1 < M) begin : g_b_in
      assign b_init = u[2*j+1];
    end else begin : g_b_pad
      assign b_init = '1;
    end

    // Selector inputs when ini = 1: the cell registers, or ones.
    if (2 * j < P) begin : g_a_fb
      assign a_loop = r[2*j];
    end else begin : g_a_pad
      assign a_loop = '1;
    end
    if (2 * j + 1 < P) begin : g_b_fb
      assign b_loop = r[2*j+1];
    end else begin : g_b_pad1
      assign b_loop = '1;
    end

    assign a = ini ? a_loop : a_init;
    assign b = ini ? b_loop : b_init;

    always_ff @(posedge clk) begin
      if (rst)     r[j] <= '0;
      else if (ce) r[j] <= (b[E-1 -: DIST_W] < a[E-1 -: DIST_W]) ? b : a;
    end
  end

  assign min_dist = r[0][E-1 -: DIST_W];
  assign min_idx  = r[0][IDX_W-1:0];

endmodule
