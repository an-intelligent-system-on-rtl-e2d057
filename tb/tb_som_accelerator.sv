// tb_som_accelerator: self-checking test of the full SOM classifier at its
// default size (N = 4 features, M = 121 neurons, 8-bit data, 5 clusters).
// The reference model here recomputes the default weight formula
//   m_ij = ((i + 1) * (2j + 37) * 73 + 151 j) mod 256,
// all 121 squared distances, the first minimum and its cluster
// floor(i * 5 / 121), and checks cluster, BMU index, BMU distance and the
// latency of 3 + ceil(log2 4) + ceil(log2 121) = 12 edges. Stimuli: the
// sample of the published simulation, samples equal to a neuron's weights
// (distance 0), corner samples and random ones.
module tb_som_accelerator;
  localparam int N = 4, M = 121, LAT = 12;
  logic clk = 0, rst = 1, launch = 0;
  logic [N-1:0][7:0] x;
  logic busy, ready;
  logic [2:0] cluster;
  logic [6:0] bmu_idx;
  logic [17:0] bmu_dist;
  logic [7:0] index;
  int checks = 0, failures = 0;
  int clusters_seen [5] = '{default: 0};

  som_accelerator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wt(int i, int j);
    return ((i + 1) * (2 * j + 37) * 73 + 151 * j) % 256;
  endfunction

  task automatic classify(logic [N-1:0][7:0] s);
    int bd, bi, d, e, edges;
    bd = 1 << 30; bi = -1;
    for (int i = 0; i < M; i++) begin
      d = 0;
      for (int j = 0; j < N; j++) begin
        e = int'(s[j]) - wt(i, j);
        d += e * e;
      end
      if (d < bd) begin bd = d; bi = i; end
    end
    x = s; launch = 1;
    @(posedge clk); #1; launch = 0; edges = 1;
    x = {$urandom};                // inputs may change once loaded
    while (!ready && edges < 100) begin @(posedge clk); #1; edges++; end
    checks += 4;
    if (edges != LAT) begin failures++; $display("latency %0d, expected %0d", edges, LAT); end
    if (int'(bmu_idx) != bi) begin failures++; $display("BMU %0d expected %0d", bmu_idx, bi); end
    if (int'(bmu_dist) != bd) begin failures++; $display("dist %0d expected %0d", bmu_dist, bd); end
    if (int'(cluster) != (bi * 5) / M) begin
      failures++; $display("cluster %0d expected %0d", cluster, (bi * 5) / M);
    end
    if (int'(cluster) < 5) clusters_seen[cluster]++;
  endtask

  initial begin
    logic [N-1:0][7:0] s;
    x = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (cluster != 0) begin failures++; $display("cluster not 0 in reset"); end
    rst = 0;
    // Sample of the published simulation: 0.62890625, 0.40625, 0.46484375,
    // 0.14453125 in Q0.8 (x1 in the low byte).
    classify({8'd37, 8'd119, 8'd104, 8'd161});
    classify('0);
    classify('1);
    for (int i = 0; i < M; i += 10) begin
      for (int j = 0; j < N; j++) s[j] = 8'(wt(i, j));
      classify(s);
    end
    for (int t = 0; t < 60; t++) classify({$urandom});
    for (int c = 0; c < 5; c++) $display("cluster %0d: %0d samples", c, clusters_seen[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
