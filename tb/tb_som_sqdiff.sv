// tb_som_sqdiff: self-checking test of the distance module.
// Streams random (x, w) pairs, one per cycle, and checks that (x - w)^2
// appears exactly two edges later, computed here with integer arithmetic.
module tb_som_sqdiff;
  localparam int W = 8;
  logic clk = 0, rst = 1;
  logic [W-1:0] x, w;
  logic [2*W-1:0] sq;
  int checks = 0, failures = 0;
  int exp_q [$];

  som_sqdiff #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    x = 0; w = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 300; t++) begin
      if (t < 4)       begin x = (t & 1) ? 8'hFF : 8'h00; w = (t & 1) ? 8'h00 : 8'hFF; end
      else             begin x = W'($urandom); w = W'($urandom); end
      exp_q.push_back((int'(x) - int'(w)) * (int'(x) - int'(w)));
      @(posedge clk); #1;
      if (t >= 1) begin
        // value presented at t-1 must be out now (two edges later)
        e = exp_q.pop_front();
        checks++;
        if (int'(sq) != e) begin
          failures++; $display("t=%0d sq=%0d expected %0d", t, sq, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
