// tb_som_axi_lite: self-checking test of the AXI4-Lite register interface.
// The accelerator side is driven directly by this bench. Checks: feature
// registers written (full and byte-masked) and read back and presented on x;
// a CTRL write gives exactly one launch pulse, a CTRL write of 0 none;
// STATUS, RESULT and DIST reflect busy/ready/index, cluster, BMU index and
// distance; unmapped addresses read 0; responses are OKAY and are held
// while the master delays BREADY/RREADY.
module tb_som_axi_lite;
  localparam int N = 4, W = 8;
  logic clk = 0, rst = 1;
  logic [7:0]  s_awaddr = 0, s_araddr = 0;
  logic        s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0;
  logic [3:0]  s_wstrb = 0;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic        launch, busy = 0, ready = 0;
  logic [7:0]  index = 0;
  logic [N-1:0][W-1:0] x;
  logic [2:0]  cluster = 0;
  logic [6:0]  bmu_idx = 0;
  logic [17:0] bmu_dist = 0;
  int checks = 0, failures = 0, pulses = 0;
  logic [7:0] model [N];

  som_axi_lite #(.ADDR_W(8), .N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (launch) pulses++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d, logic [3:0] strb, int delay);
    s_awaddr = a; s_wdata = d; s_wstrb = strb; s_awvalid = 1; s_wvalid = 1; #1;
    while (!(s_awready && s_wready)) begin @(posedge clk); #1; end
    @(posedge clk); #1 s_awvalid = 0; s_wvalid = 0;
    repeat (delay) begin
      @(posedge clk); #1;
      checks++; if (!s_bvalid) begin failures++; $display("BVALID dropped"); end
    end
    while (!s_bvalid) begin @(posedge clk); #1; end
    s_bready = 1;
    @(posedge clk); #1 s_bready = 0;
    checks++; if (s_bresp != 0) begin failures++; $display("BRESP %0d", s_bresp); end
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d, input int delay);
    logic [31:0] first;
    s_araddr = a; s_arvalid = 1; #1;
    while (!s_arready) begin @(posedge clk); #1; end
    @(posedge clk); #1 s_arvalid = 0;
    first = s_rdata;
    repeat (delay) begin
      @(posedge clk); #1;
      checks++; if (!s_rvalid || s_rdata != first) begin failures++; $display("R not held"); end
    end
    while (!s_rvalid) begin @(posedge clk); #1; end
    d = s_rdata;
    s_rready = 1;
    @(posedge clk); #1 s_rready = 0;
  endtask

  task automatic expect_rd(logic [7:0] a, logic [31:0] e, string tag);
    logic [31:0] r;
    rd(a, r, $urandom % 3);
    checks++;
    if (r != e) begin failures++; $display("%s: read %h expected %h", tag, r, e); end
  endtask

  initial begin
    int p0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int j = 0; j < N; j++) model[j] = 0;
    for (int t = 0; t < 40; t++) begin
      int j;
      logic [31:0] d;
      logic [3:0] st;
      j = $urandom % N; d = $urandom; st = (t % 3 == 0) ? 4'(1 << ($urandom % 4)) : 4'hF;
      wr(8'h10 + 8'(4 * j), d, st, $urandom % 3);
      if (st[0]) model[j] = d[7:0];
      for (int k = 0; k < N; k++) begin
        expect_rd(8'h10 + 8'(4 * k), 32'(model[k]), "feature");
        checks++;
        if (x[k] != model[k]) begin failures++; $display("x[%0d]=%h expected %h", k, x[k], model[k]); end
      end
    end
    p0 = pulses;
    wr(8'h00, 32'h1, 4'hF, 0);
    repeat (3) @(posedge clk); #1;
    checks++; if (pulses != p0 + 1) begin failures++; $display("launch pulses %0d", pulses - p0); end
    wr(8'h00, 32'h0, 4'hF, 1);
    repeat (3) @(posedge clk); #1;
    checks++; if (pulses != p0 + 1) begin failures++; $display("launch on CTRL=0"); end
    for (int t = 0; t < 20; t++) begin
      busy = $urandom; ready = $urandom; index = 8'($urandom);
      cluster = 3'($urandom % 5); bmu_idx = 7'($urandom % 121); bmu_dist = 18'($urandom);
      expect_rd(8'h04, {16'd0, index, 6'd0, busy, ready}, "status");
      expect_rd(8'h08, {9'd0, bmu_idx, 13'd0, cluster}, "result");
      expect_rd(8'h0C, {14'd0, bmu_dist}, "dist");
    end
    expect_rd(8'h40, 32'd0, "unmapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
