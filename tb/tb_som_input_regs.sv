// tb_som_input_regs: self-checking test of the feature input registers.
// Random samples are offered every cycle with a random load; the registers
// must capture on load, hold otherwise and clear on rst.
module tb_som_input_regs;
  localparam int N = 4, W = 8;
  logic clk = 0, rst = 1, load = 0;
  logic [N-1:0][W-1:0] x_in, x_q, model;
  int checks = 0, failures = 0;

  som_input_regs #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_in = '0;
    model = '0;
    @(posedge clk); #1;
    rst = 0;
    checks++; if (x_q !== '0) begin failures++; $display("not cleared"); end
    for (int t = 0; t < 100; t++) begin
      x_in = {$urandom, $urandom};
      load = ($urandom % 3) == 0;
      @(posedge clk); #1;
      if (load) model = x_in;
      checks++;
      if (x_q !== model) begin
        failures++; $display("t=%0d x_q=%h expected %h", t, x_q, model);
      end
    end
    rst = 1; @(posedge clk); #1; rst = 0;
    checks++; if (x_q !== '0) begin failures++; $display("rst did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
