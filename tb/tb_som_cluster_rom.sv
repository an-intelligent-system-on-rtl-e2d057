// tb_som_cluster_rom: self-checking test of the cluster memory.
// Every address 0..127 is read: addresses below 121 must return the default
// label floor(i * 5 / 121) (the synthetic cluster bands), the unused ones 0;
// while rst is high the output must be forced to 0. A second instance holds
// the three-cluster labelling in 2-bit codes, floor(i * 3 / 121).
module tb_som_cluster_rom;
  logic rst;
  logic [6:0] addr;
  logic [2:0] cluster;
  int checks = 0, failures = 0;

  logic [1:0] cluster3;

  som_cluster_rom #(.M(121), .IDX_W(7), .N_CLUSTERS(5), .CLUSTER_W(3)) dut (.*);
  som_cluster_rom #(.M(121), .IDX_W(7), .N_CLUSTERS(3), .CLUSTER_W(2)) dut3 (
    .rst, .addr, .cluster(cluster3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    int hist [5] = '{default: 0};
    rst = 0;
    for (int i = 0; i < 128; i++) begin
      addr = 7'(i); #1;
      e = (i < 121) ? (i * 5) / 121 : 0;
      if (i < 121) hist[e]++;
      checks++;
      if (int'(cluster) != e) begin failures++; $display("addr %0d: %0d expected %0d", i, cluster, e); end
      e = (i < 121) ? (i * 3) / 121 : 0;
      checks++;
      if (int'(cluster3) != e) begin failures++; $display("3-cluster addr %0d: %0d expected %0d", i, cluster3, e); end
    end
    // Five non-empty clusters.
    for (int c = 0; c < 5; c++) begin
      checks++;
      if (hist[c] == 0) begin failures++; $display("cluster %0d empty", c); end
    end
    rst = 1;
    for (int i = 0; i < 121; i += 7) begin
      addr = 7'(i); #1;
      checks++;
      if (cluster != 0) begin failures++; $display("rst: addr %0d gives %0d", i, cluster); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
