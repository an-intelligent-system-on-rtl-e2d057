// tb_som_controller: self-checking test of the classification sequencer.
// For N = 4, M = 121 a launch must give: load on the launch edge; index
// 1..5 with ce = 0 except ce = 1, ini = 0 at index 5; then index 1..6 with
// ce = ini = 1; then ready (held) with index 7, exactly 12 edges after the
// launch edge counted as the first. A launch while busy is ignored, rst
// returns to idle, and a new launch from the ready state restarts.
module tb_som_controller;
  logic clk = 0, rst = 1, launch = 0;
  logic load, ce, ini, busy, ready;
  logic [7:0] index;
  int checks = 0, failures = 0;
  int ignored = 0;

  som_controller #(.N(4), .M(121)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sig(string tag, logic c, logic i, logic b, logic r, int idx);
    checks++;
    if (ce !== c || ini !== i || busy !== b || ready !== r || int'(index) != idx) begin
      failures++;
      $display("%s: ce=%0d ini=%0d busy=%0d ready=%0d index=%0d expected %0d %0d %0d %0d %0d",
               tag, ce, ini, busy, ready, index, c, i, b, r, idx);
    end
  endtask

  // One classification; `poke` issues a launch during the busy phase.
  task automatic one_run(bit poke);
    int edges;
    launch = 1; #1;
    checks++; if (!load) begin failures++; $display("no load with launch"); end
    @(posedge clk); #1; launch = 0; edges = 1;
    for (int k = 1; k <= 5; k++) begin
      expect_sig($sformatf("fill %0d", k), k == 5, 1'b0, 1'b1, 1'b0, k);
      if (poke && k == 2) begin
        launch = 1; #1;
        checks++; if (load) begin failures++; $display("load while busy"); end
        else ignored++;
      end
      @(posedge clk); #1; launch = 0; edges++;
    end
    for (int k = 1; k <= 6; k++) begin
      expect_sig($sformatf("cmp %0d", k), 1'b1, 1'b1, 1'b1, 1'b0, k);
      @(posedge clk); #1; edges++;
    end
    expect_sig("done", 1'b0, 1'b1, 1'b0, 1'b1, 7);
    checks++;
    if (edges != 12) begin failures++; $display("latency %0d edges, expected 12", edges); end
    repeat (3) @(posedge clk); #1;
    expect_sig("done held", 1'b0, 1'b1, 1'b0, 1'b1, 7);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    expect_sig("idle", 1'b0, 1'b0, 1'b0, 1'b0, 0);
    one_run(0);
    one_run(1);
    // rst in the middle of a run
    launch = 1; @(posedge clk); #1; launch = 0;
    repeat (4) @(posedge clk); #1;
    rst = 1; @(posedge clk); #1; rst = 0;
    expect_sig("after rst", 1'b0, 1'b0, 1'b0, 1'b0, 0);
    one_run(0);
    checks++; if (ignored != 1) begin failures++; $display("busy launch not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
