// tb_som_drive_session: one driver's evaluation period run through the
// hardware partition at its default size, the way the processor uses it.
// A synthetic 292 s drive is generated here: four feature traces (mean gas
// pedal %, mean engine RPM, mean gas-pedal pressure, variance of positive
// longitudinal acceleration, all already scaled to Q0.8) follow bounded
// random walks with occasional regime changes. Windows are 8 s long and a
// new one starts every 4 s, so 292 s gives 72 windows. Each window's
// features are written over AXI4-Lite, classified and read back; every
// answer is checked against a reference model of the map (default weight
// formula, first minimum, cluster floor(i * 5 / 121)). As the processor
// would, the bench builds the cluster distribution for evaluation times of
// 8 s, 60 s and 292 s and reports the dominant cluster, checking it against
// the model's distribution.
module tb_som_drive_session;
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
  int n_slow_ready = 0;
  bit slow = 0;

  som_axi_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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


  function automatic int classify_model(logic [3:0][7:0] s);
    int bd, bi, d, e;
    bd = 1 << 30; bi = 0;
    for (int i = 0; i < 121; i++) begin
      d = 0;
      for (int j = 0; j < 4; j++) begin e = int'(s[j]) - wt(i, j); d += e * e; end
      if (d < bd) begin bd = d; bi = i; end
    end
    return (bi * 5) / 121;
  endfunction

  function automatic int clip(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  initial begin
    int f [4];
    int hw_hist [5], sw_hist [5];
    int windows, c_hw, c_sw;
    logic [31:0] r;
    logic [3:0][7:0] s;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int j = 0; j < 4; j++) f[j] = 128;
    for (int c = 0; c < 5; c++) begin hw_hist[c] = 0; sw_hist[c] = 0; end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    windows = (292 - 8) / 4 + 1;
    for (int w = 0; w < windows; w++) begin
      // Drive model: small steps each window, a regime change every ~10.
      for (int j = 0; j < 4; j++) begin
        if ($urandom % 10 == 0) f[j] = $urandom % 256;
        else f[j] = clip(f[j] + int'($urandom % 41) - 20);
        s[j] = 8'(f[j]);
      end
      for (int j = 0; j < 4; j++) axi_write(8'h10 + 8'(4 * j), 32'(s[j]));
      axi_write(8'h00, 32'h1);
      do axi_read(8'h04, r); while (!r[0]);
      axi_read(8'h08, r);
      c_hw = int'(r[7:0]);
      c_sw = classify_model(s);
      checks++;
      if (c_hw != c_sw) begin failures++; $display("window %0d: cluster %0d expected %0d", w, c_hw, c_sw); end
      if (c_hw < 5) hw_hist[c_hw]++;
      sw_hist[c_sw]++;
      if (w == 0 || w == (60 - 8) / 4 || w == windows - 1) begin
        int best_hw, best_sw;
        best_hw = 0; best_sw = 0;
        for (int c = 1; c < 5; c++) begin
          if (hw_hist[c] > hw_hist[best_hw]) best_hw = c;
          if (sw_hist[c] > sw_hist[best_sw]) best_sw = c;
        end
        $display("evaluation time %0d s (%0d windows): distribution %0d/%0d/%0d/%0d/%0d, dominant cluster %0d",
                 8 + 4 * w, w + 1, hw_hist[0], hw_hist[1], hw_hist[2], hw_hist[3], hw_hist[4], best_hw);
        checks++;
        if (best_hw != best_sw) begin failures++; $display("dominant cluster %0d expected %0d", best_hw, best_sw); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
