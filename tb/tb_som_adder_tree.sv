// tb_som_adder_tree: self-checking test of the pipelined adder tree.
// Two trees are driven with random terms every cycle: the default 4-term
// tree (sum after 2 edges) and a 5-term tree (odd count, sum after 3 edges).
// Sums are formed here in integer arithmetic and compared at exactly the
// expected latency, which also checks ceil(log2 N).
module tb_som_adder_tree;
  localparam int IN_W = 16;
  logic clk = 0, rst = 1;
  logic [3:0][IN_W-1:0] t4;
  logic [4:0][IN_W-1:0] t5;
  logic [IN_W+1:0] s4;
  logic [IN_W+2:0] s5;
  int checks = 0, failures = 0;
  int q4 [$], q5 [$];

  som_adder_tree #(.N(4), .IN_W(IN_W)) dut4 (.clk, .rst, .terms(t4), .sum(s4));
  som_adder_tree #(.N(5), .IN_W(IN_W)) dut5 (.clk, .rst, .terms(t5), .sum(s5));

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e4, e5;
    t4 = '0; t5 = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 300; t++) begin
      e4 = 0; e5 = 0;
      for (int k = 0; k < 5; k++) begin
        logic [IN_W-1:0] v;
        v = (t == 0) ? '1 : IN_W'($urandom);
        if (k < 4) begin t4[k] = v; e4 += int'(v); end
        t5[k] = v; e5 += int'(v);
      end
      q4.push_back(e4); q5.push_back(e5);
      @(posedge clk); #1;
      if (t >= 1) begin
        e4 = q4.pop_front();
        checks++;
        if (int'(s4) != e4) begin failures++; $display("N=4 t=%0d %0d != %0d", t, s4, e4); end
      end
      if (t >= 2) begin
        e5 = q5.pop_front();
        checks++;
        if (int'(s5) != e5) begin failures++; $display("N=5 t=%0d %0d != %0d", t, s5, e5); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
