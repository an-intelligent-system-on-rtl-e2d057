// som_adder_tree: pipelined binary adder tree of a neuron.
//
// Sums N unsigned IN_W-bit terms two by two, one registered tree level per
// clock cycle, so the sum appears ceil(log2 N) rising edges after the terms
// (zero levels, a plain wire, for N = 1). Each level holds ceil(n/2) partial
// sums; an odd term out is carried to the next level unchanged. The output
// has ceil(log2 N) extra bits, so the sum never overflows. rst (synchronous,
// active high) clears every level. The two-by-two tree and its latency
// follow the published design; the register per level is implied by it.
module som_adder_tree #(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = IN_W + ((N > 1) ? $clog2(N) : 0)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [N-1:0][IN_W-1:0] terms,
  output logic [OUT_W-1:0]       sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;

  // Number of partial sums held at tree level l (level 0 = the inputs).
  function automatic int unsigned count_at(int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CNT = count_at(l);
    logic [OUT_W-1:0] v [CNT];

    if (l == 0) begin : g_in
      for (genvar k = 0; k < CNT; k++) begin : g_term
        assign v[k] = OUT_W'(terms[k]);
      end
    end else begin : g_add
      localparam int unsigned PCNT = count_at(l - 1);
      for (genvar k = 0; k < CNT; k++) begin : g_node
        if (2 * k + 1 < PCNT) begin : g_pair
          always_ff @(posedge clk) begin
            if (rst) v[k] <= '0;
            else     v[k] <= g_lvl[l-1].v[2*k] + g_lvl[l-1].v[2*k+1];
          end
        end else begin : g_odd
          always_ff @(posedge clk) begin
            if (rst) v[k] <= '0;
            else     v[k] <= g_lvl[l-1].v[2*k];
          end
        end
      end
    end
  end

  assign sum = g_lvl[LEVELS].v[0];

endmodule
