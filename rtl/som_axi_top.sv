// som_axi_top: hardware partition of the eco-driving assessment system.
//
// The SOM classifier packaged as an AXI4-Lite peripheral for the processor of
// a processing-system-plus-FPGA device. Software computes the four window
// features (means of gas-pedal percentage, engine RPM and gas-pedal pressure,
// variance of positive longitudinal acceleration) every 4 s, writes them to
// the feature registers, writes CTRL.0 to launch, polls STATUS.ready and
// reads RESULT (driving-style cluster and BMU index) and DIST. The
// classification itself takes 3 + ceil(log2 N) + ceil(log2 M) cycles
// (12 at the defaults) after the CTRL write is accepted plus one cycle for
// the launch register. Ports are the AXI4-Lite slave signals, clock and a
// synchronous active-high reset; the register map is described in
// som_axi_lite. The split of work between processor and accelerator follows
// the published system; the register map is this design's.
module som_axi_top #(
  parameter int unsigned N          = som_pkg::N_FEATURES,
  parameter int unsigned M          = som_pkg::N_NEURONS,
  parameter int unsigned W          = som_pkg::DATA_W,
  parameter int unsigned N_CLUSTERS = som_pkg::N_CLUSTERS,
  parameter int unsigned CLUSTER_W  = som_pkg::CLUSTER_W,
  parameter int unsigned ADDR_W     = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready
);

  localparam int unsigned DIST_W = som_pkg::dist_width(N, W);
  localparam int unsigned IDX_W  = som_pkg::idx_width(M);

  logic                 launch, busy, ready;
  logic [N-1:0][W-1:0]  x;
  logic [CLUSTER_W-1:0] cluster;
  logic [IDX_W-1:0]     bmu_idx;
  logic [DIST_W-1:0]    bmu_dist;
  logic [7:0]           index;

  som_axi_lite #(
    .ADDR_W(ADDR_W), .N(N), .W(W), .CLUSTER_W(CLUSTER_W), .IDX_W(IDX_W),
    .DIST_W(DIST_W)
  ) u_axi (
    .clk(clk), .rst(rst),
    .s_awaddr(s_awaddr), .s_awvalid(s_awvalid), .s_awready(s_awready),
    .s_wdata(s_wdata), .s_wstrb(s_wstrb), .s_wvalid(s_wvalid),
    .s_wready(s_wready), .s_bresp(s_bresp), .s_bvalid(s_bvalid),
    .s_bready(s_bready), .s_araddr(s_araddr), .s_arvalid(s_arvalid),
    .s_arready(s_arready), .s_rdata(s_rdata), .s_rresp(s_rresp),
    .s_rvalid(s_rvalid), .s_rready(s_rready),
    .launch(launch), .x(x), .busy(busy), .ready(ready), .index(index), .cluster(cluster),
    .bmu_idx(bmu_idx), .bmu_dist(bmu_dist)
  );

  som_accelerator #(
    .N(N), .M(M), .W(W), .N_CLUSTERS(N_CLUSTERS), .CLUSTER_W(CLUSTER_W),
    .DIST_W(DIST_W), .IDX_W(IDX_W)
  ) u_som (
    .clk(clk), .rst(rst), .launch(launch), .x(x), .busy(busy),
    .ready(ready), .cluster(cluster), .bmu_idx(bmu_idx), .bmu_dist(bmu_dist),
    .index(index)
  );

endmodule
