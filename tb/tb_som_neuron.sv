// tb_som_neuron: self-checking test of one neuron.
// A neuron with index 37 and fixed weights sees a new random sample every
// cycle; its output {distance, index} must equal sum_j (x_j - m_j)^2 computed
// here, exactly 2 + ceil(log2 4) = 4 edges after the sample.
module tb_som_neuron;
  localparam int N = 4, W = 8, IDX_W = 7, DIST_W = 18, LAT = 4;
  localparam logic [N-1:0][W-1:0] WTS = {8'd200, 8'd7, 8'd128, 8'd255};
  logic clk = 0, rst = 1;
  logic [N-1:0][W-1:0] x;
  logic [DIST_W+IDX_W-1:0] out;
  int checks = 0, failures = 0;
  int q [$];

  som_neuron #(.N(N), .W(W), .IDX_W(IDX_W), .INDEX(37), .WEIGHTS(WTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, d;
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 300; t++) begin
      x = (t == 0) ? {8'd0, 8'd255, 8'd255, 8'd0} : {$urandom};
      e = 0;
      for (int j = 0; j < N; j++) begin
        d = int'(x[j]) - int'(WTS[j]);
        e += d * d;
      end
      q.push_back(e);
      @(posedge clk); #1;
      if (t >= LAT - 1) begin
        e = q.pop_front();
        checks++;
        if (int'(out[DIST_W+IDX_W-1:IDX_W]) != e || out[IDX_W-1:0] != 7'd37) begin
          failures++; $display("t=%0d dist=%0d idx=%0d expected %0d/37", t,
                               out[DIST_W+IDX_W-1:IDX_W], out[IDX_W-1:0], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
