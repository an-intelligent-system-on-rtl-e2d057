// tb_som_tree_comparer: self-checking test of the recursive tree comparer.
// Two comparers are exercised: the 121-input default and the 6-input case
// of the small example map. For each test vector u[i] = {d_i, i} the
// sequence is one ini = 0 step and ceil(log2 M) - 1 ini = 1 steps (7 and 3
// steps in total); the output must then be the smallest d_i and the lowest
// index holding it, found here by a linear scan. Vectors include random,
// many-way ties, all-equal, all-maximum and a minimum in the last slot. The
// output must also hold while ce = 0 and clear on rst.
module tb_som_tree_comparer;
  localparam int DW = 18, IW = 7;
  logic clk = 0, rst = 1, ce = 0, ini = 0;
  logic [120:0][DW+IW-1:0] u_big;
  logic [5:0][DW+IW-1:0]   u_small;
  logic [DW-1:0] md_big, md_small;
  logic [IW-1:0] mi_big, mi_small;
  int checks = 0, failures = 0;

  som_tree_comparer #(.M(121), .DIST_W(DW), .IDX_W(IW)) dut_big (
    .clk, .rst, .ce, .ini, .u(u_big), .min_dist(md_big), .min_idx(mi_big));
  som_tree_comparer #(.M(6), .DIST_W(DW), .IDX_W(IW)) dut_small (
    .clk, .rst, .ce, .ini, .u(u_small), .min_dist(md_small), .min_idx(mi_small));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs `steps` comparer steps: the first with ini = 0, the rest ini = 1.
  task automatic run(int steps);
    ce = 1; ini = 0;
    for (int s = 0; s < steps; s++) begin
      @(posedge clk); #1;
      ini = 1;
    end
    ce = 0; ini = 0;
  endtask

  task automatic fill(int mode);
    int mval;
    for (int i = 0; i < 121; i++) begin
      logic [DW-1:0] d;
      case (mode)
        0: d = DW'($urandom % 260101);
        1: d = DW'($urandom % 4);            // many ties
        2: d = 18'd1000;                     // all equal
        3: d = 18'd260100;                   // all at the largest distance
        default: d = (i == 120) ? 18'd5 : DW'(18'd6 + ($urandom % 1000));
      endcase
      u_big[i] = {d, IW'(i)};
      if (i < 6) u_small[i] = {d, IW'(i)};
    end
    if (mode == 4) u_small[5] = {18'd2, IW'(5)};
  endtask

  task automatic check_result(string tag);
    int bd, bi, sd, si;
    bd = int'(u_big[0][DW+IW-1:IW]); bi = 0;
    for (int i = 1; i < 121; i++)
      if (int'(u_big[i][DW+IW-1:IW]) < bd) begin bd = int'(u_big[i][DW+IW-1:IW]); bi = i; end
    sd = int'(u_small[0][DW+IW-1:IW]); si = 0;
    for (int i = 1; i < 6; i++)
      if (int'(u_small[i][DW+IW-1:IW]) < sd) begin sd = int'(u_small[i][DW+IW-1:IW]); si = i; end
    checks += 2;
    if (int'(md_big) != bd || int'(mi_big) != bi) begin
      failures++; $display("%s M=121: got %0d@%0d expected %0d@%0d", tag, md_big, mi_big, bd, bi);
    end
    if (int'(md_small) != sd || int'(mi_small) != si) begin
      failures++; $display("%s M=6: got %0d@%0d expected %0d@%0d", tag, md_small, mi_small, sd, si);
    end
  endtask

  initial begin
    u_big = '0; u_small = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 200; t++) begin
      fill(t < 5 ? t : (t % 2 == 0 ? 0 : 1));
      // Both comparers start together; the small one is done after 3 steps
      // and must stay unchanged through the larger one's extra ini = 1 steps.
      run(7);
      check_result("run");
    end
    // Latency of the 6-input comparer alone: exactly 3 steps.
    fill(4);
    run(3);
    begin
      int sd, si;
      sd = int'(u_small[0][DW+IW-1:IW]); si = 0;
      for (int i = 1; i < 6; i++)
        if (int'(u_small[i][DW+IW-1:IW]) < sd) begin sd = int'(u_small[i][DW+IW-1:IW]); si = i; end
      checks++;
      if (int'(md_small) != sd || int'(mi_small) != si) begin
        failures++; $display("M=6 after 3 steps: %0d@%0d expected %0d@%0d", md_small, mi_small, sd, si);
      end
    end
    // Hold with ce = 0.
    begin
      logic [DW-1:0] d0; logic [IW-1:0] i0;
      fill(0); run(7); d0 = md_big; i0 = mi_big;
      fill(0); repeat (5) @(posedge clk); #1;
      checks++;
      if (md_big != d0 || mi_big != i0) begin failures++; $display("ce=0 did not hold"); end
    end
    rst = 1; @(posedge clk); #1; rst = 0;
    checks++;
    if (md_big != 0 || mi_big != 0) begin failures++; $display("rst did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
