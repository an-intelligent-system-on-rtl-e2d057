// som_controller: sequencer of one SOM classification.
//
// A launch pulse, sampled while the unit is not busy, makes the input
// registers load the sample on that same edge (load = launch & ~busy). The
// controller then counts index = 1 .. ceil(log2 N)+3 while the neurons
// compute (phase FILL), the neurons' two distance cycles and the adder tree;
// at index ceil(log2 N)+3 it enables the tree comparer with ini = 0, which
// copies the neuron outputs into the comparer. It then raises ini and counts
// index = 1 .. ceil(log2 M)-1 (phase COMPARE) while the comparer folds. On
// the last comparer step it sets ready and moves to DONE, where index shows
// ceil(log2 M), the comparer is frozen (ce = 0) and ready stays high until
// the next launch or rst. Counting the launch edge, the result is ready
// 3 + ceil(log2 N) + ceil(log2 M) rising edges after launch, 12 for N = 4 and
// M = 121. The control signal names, the phase lengths, the index counter
// and the latency are from the published timing diagram; the FSM encoding,
// ignoring launch while busy and holding ready until the next launch are
// this design's choices. rst is synchronous and active high.
module som_controller #(
  parameter int unsigned N = 4,
  parameter int unsigned M = 121
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       launch,
  output logic       load,
  output logic       ce,
  output logic       ini,
  output logic       busy,
  output logic       ready,
  output logic [7:0] index
);

  localparam int unsigned LN = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned LM = (M > 1) ? $clog2(M) : 1;
  localparam logic [7:0] FILL_LAST = 8'(LN + 3);
  localparam logic [7:0] CMP_LAST  = 8'(LM - 1);

  typedef enum logic [1:0] {IDLE, FILL, COMPARE, DONE} state_e;

  state_e     state;
  logic [7:0] cnt;

  assign busy  = (state == FILL) || (state == COMPARE);
  assign ready = (state == DONE);
  assign load  = launch && !busy;
  assign index = cnt;

  always_comb begin
    ce  = 1'b0;
    ini = 1'b0;
    unique case (state)
      FILL:    ce = (cnt == FILL_LAST);
      COMPARE: begin ce = 1'b1; ini = 1'b1; end
      DONE:    ini = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      cnt   <= '0;
    end else if (load) begin
      state <= FILL;
      cnt   <= 8'd1;
    end else begin
      unique case (state)
        FILL:
          if (cnt == FILL_LAST) begin
            if (LM > 1) begin
              state <= COMPARE;
              cnt   <= 8'd1;
            end else begin
              state <= DONE;
              cnt   <= 8'(LM);
            end
          end else begin
            cnt <= cnt + 8'd1;
          end
        COMPARE:
          if (cnt == CMP_LAST) begin
            state <= DONE;
            cnt   <= 8'(LM);
          end else begin
            cnt <= cnt + 8'd1;
          end
        default: ;
      endcase
    end
  end

  // A result is only announced at the end of a comparer sequence.
  a_ready_after_compare: assert property (@(posedge clk) disable iff (rst)
    $rose(ready) |-> ($past(state) == COMPARE) || (LM == 1));
  // The comparer is only enabled while a classification is in flight.
  a_ce_only_busy: assert property (@(posedge clk) disable iff (rst)
    ce |-> busy);

endmodule
