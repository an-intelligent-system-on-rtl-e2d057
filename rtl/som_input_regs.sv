// som_input_regs: the input feature registers of the SOM classifier.
//
// One W-bit register per feature. On a clock edge where `load` is high the
// sample x_in is captured, and x_q then holds it steady for the neurons while
// the classification runs; this is the one-cycle "load" step of the latency
// budget. A synchronous, active-high rst clears every register, as the rst
// control signal clears all architecture registers. The register-per-feature
// structure is from the published design; the load enable is this design's
// way of tying the registers to the launch control signal.
module som_input_regs #(
  parameter int unsigned N = 4,   // number of input features
  parameter int unsigned W = 8    // bits per feature
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                load,
  input  logic [N-1:0][W-1:0] x_in,
  output logic [N-1:0][W-1:0] x_q
);

  for (genvar j = 0; j < N; j++) begin : g_reg
    always_ff @(posedge clk) begin
      if (rst)       x_q[j] <= '0;
      else if (load) x_q[j] <= x_in[j];
    end
  end

endmodule
