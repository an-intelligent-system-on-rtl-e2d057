// tb_som_axi_top: end-to-end test of the hardware partition at its default
// size (4 features, 121 neurons, 5 clusters), driven as the processor would
// drive it over AXI4-Lite: write the four features, write CTRL to launch,
// poll STATUS until ready, read RESULT and DIST. A reference model in this
// file (default weight formula, squared distances, first minimum, cluster
// floor(i * 5 / 121)) checks every answer. Mechanisms that must each occur
// at least once, counted and reported: a completed classification, a poll
// that finds the unit busy, a launch written while busy (ignored), a reset
// in the middle of a classification, a byte-masked (WSTRB) feature write,
// a zero-distance match, every one of the five clusters, and an AXI master
// that delays BREADY/RREADY. It also checks the classification latency
// seen from the bus: ready is first seen 12 cycles after the launch.
module tb_som_axi_top;
  localparam int N = 4, M = 121;
  logic clk = 0, rst = 1;
  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata;
  logic [3:0]  s_wstrb;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  int checks = 0, failures = 0;
  int n_done = 0, n_busy_poll = 0, n_busy_launch = 0, n_mid_reset = 0;
  int n_strb = 0, n_zero = 0, n_slow_ready = 0;
  int seen [5] = '{default: 0};
  bit slow = 0;

  som_axi_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wt(int i, int j);
    return ((i + 1) * (2 * j + 37) * 73 + 151 * j) % 256;
  endfunction

  task automatic axi_write(logic [7:0] a, logic [31:0] d, logic [3:0] strb = 4'hF);
    s_awaddr = a; s_wdata = d; s_wstrb = strb; s_awvalid = 1; s_wvalid = 1; #1;
    while (!(s_awready && s_wready)) begin @(posedge clk); #1; end
    @(posedge clk); #1 s_awvalid = 0; s_wvalid = 0;
    if (slow) begin repeat (2) @(posedge clk); #1; n_slow_ready++; end
    while (!s_bvalid) begin @(posedge clk); #1; end
    s_bready = 1;
    @(posedge clk); #1 s_bready = 0;
    checks++; if (s_bresp != 2'b00) begin failures++; $display("bad BRESP"); end
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    s_araddr = a; s_arvalid = 1; #1;
    while (!s_arready) begin @(posedge clk); #1; end
    @(posedge clk); #1 s_arvalid = 0;
    if (slow) begin repeat (2) @(posedge clk); #1; n_slow_ready++; end
    while (!s_rvalid) begin @(posedge clk); #1; end
    d = s_rdata;
    s_rready = 1;
    @(posedge clk); #1 s_rready = 0;
  endtask

  // Latency, counted in edges from the one that loads the sample (launch
  // sampled) to the first one that sees ready: must be 12.
  int cyc = 0, lcyc = 0, rcyc = 0;
  logic rdy_d = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_som.load) lcyc <= cyc;
    if (dut.u_som.ready && !rdy_d) rcyc <= cyc;
    rdy_d <= dut.u_som.ready;
  end

  task automatic classify(logic [N-1:0][7:0] s, bit poke);
    int bd, bi, d, e;
    logic [31:0] r;
    bd = 1 << 30; bi = -1;
    for (int i = 0; i < M; i++) begin
      d = 0;
      for (int j = 0; j < N; j++) begin e = int'(s[j]) - wt(i, j); d += e * e; end
      if (d < bd) begin bd = d; bi = i; end
    end
    for (int j = 0; j < N; j++) axi_write(8'h10 + 8'(4 * j), 32'(s[j]) | 32'hABCD_0000);
    for (int j = 0; j < N; j++) begin
      axi_read(8'h10 + 8'(4 * j), r);
      checks++; if (r != 32'(s[j])) begin failures++; $display("feature %0d reads %h", j, r); end
    end
    axi_write(8'h00, 32'h1);
    if (poke) begin
      axi_write(8'h00, 32'h1);   // arrives while busy: must be ignored
      n_busy_launch++;
    end
    do begin
      axi_read(8'h04, r);
      if (r[1]) n_busy_poll++;
    end while (!r[0]);
    axi_read(8'h08, r);
    checks += 3;
    if (int'(r[31:16]) != bi) begin failures++; $display("BMU %0d expected %0d", r[31:16], bi); end
    if (int'(r[7:0]) != (bi * 5) / M) begin
      failures++; $display("cluster %0d expected %0d", r[7:0], (bi * 5) / M);
    end else seen[r[7:0]]++;
    axi_read(8'h0C, r);
    if (int'(r) != bd) begin failures++; $display("dist %0d expected %0d", r, bd); end
    if (bd == 0) n_zero++;
    checks++;
    if (rcyc - lcyc != 12) begin
      failures++; $display("latency %0d cycles, expected 12", rcyc - lcyc);
    end
    n_done++;
  endtask


  initial begin
    logic [N-1:0][7:0] s;
    logic [31:0] r;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // Sample of the published simulation (Q0.8 codes 161, 104, 119, 37).
    classify({8'd37, 8'd119, 8'd104, 8'd161}, 0);
    classify({8'd37, 8'd119, 8'd104, 8'd161}, 1);
    // Byte-masked write: only byte 1 enabled, feature 0 must not change.
    axi_write(8'h10, 32'h0000_5500, 4'b0010);
    axi_read(8'h10, r);
    checks++; if (r[7:0] != 8'd161) begin failures++; $display("WSTRB ignored: %h", r); end
    else n_strb++;
    // Reset in the middle of a classification, then recover.
    axi_write(8'h00, 32'h1);
    repeat (4) @(posedge clk); #1;
    rst = 1; @(posedge clk); #1; rst = 0;
    axi_read(8'h04, r);
    checks++; if (r[1:0] != 2'b00) begin failures++; $display("status after rst %b", r[1:0]); end
    else n_mid_reset++;
    // Samples equal to neuron weights, one per cluster band.
    for (int i = 5; i < M; i += 24) begin
      for (int j = 0; j < N; j++) s[j] = 8'(wt(i, j));
      classify(s, 0);
    end
    slow = 1;
    for (int t = 0; t < 30; t++) classify({$urandom}, t % 5 == 0);
    slow = 0;
    $display("classifications=%0d busy_polls=%0d ignored_launches=%0d mid_resets=%0d",
             n_done, n_busy_poll, n_busy_launch, n_mid_reset);
    $display("strb_writes=%0d zero_distance=%0d slow_handshakes=%0d", n_strb, n_zero, n_slow_ready);
    for (int c = 0; c < 5; c++) $display("cluster %0d: %0d", c, seen[c]);
    checks++; if (n_done == 0 || n_busy_poll == 0 || n_busy_launch == 0 || n_mid_reset == 0 ||
                  n_strb == 0 || n_zero == 0 || n_slow_ready == 0) begin
      failures++; $display("a mechanism never happened");
    end
    for (int c = 0; c < 5; c++) begin
      checks++; if (seen[c] == 0) begin failures++; $display("cluster %0d never seen", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
