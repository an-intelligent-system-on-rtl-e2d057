// som_accelerator: fully parallel SOM classifier (the hardware partition core).
//
// A sample of N unsigned fixed-point features is classified against a trained
// map of M neurons. All neurons work in parallel:
//   input registers -> M neurons (distance modules + adder tree)
//   -> recursive tree comparer -> cluster ROM
// and a controller sequences the steps. Drive x, pulse launch for one cycle;
// the result (cluster, bmu_idx, bmu_dist) is valid when ready goes high,
// 3 + ceil(log2 N) + ceil(log2 M) rising edges after the launch edge
// (12 edges, 0.12 us at 100 MHz, for N = 4 and M = 121), and is held, with
// ready, until the next launch. bmu_dist is the squared distance in units of
// 2^-2W (all bits fractional). rst is synchronous and active high.
// The block structure, widths (18-bit distances, 25-bit comparer entries,
// 7-bit ROM address) and latency follow the published design. The neuron
// weights and cluster labels are the synthetic defaults of som_pkg, since
// the trained map was not published; for W other than 8 the 8-bit default
// weight codes are scaled to W bits.
module som_accelerator #(
  parameter int unsigned N          = som_pkg::N_FEATURES,
  parameter int unsigned M          = som_pkg::N_NEURONS,
  parameter int unsigned W          = som_pkg::DATA_W,
  parameter int unsigned N_CLUSTERS = som_pkg::N_CLUSTERS,
  parameter int unsigned CLUSTER_W  = som_pkg::CLUSTER_W,
  parameter int unsigned DIST_W     = som_pkg::dist_width(N, W),
  parameter int unsigned IDX_W      = som_pkg::idx_width(M)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 launch,
  input  logic [N-1:0][W-1:0]  x,
  output logic                 busy,
  output logic                 ready,
  output logic [CLUSTER_W-1:0] cluster,
  output logic [IDX_W-1:0]     bmu_idx,
  output logic [DIST_W-1:0]    bmu_dist,
  output logic [7:0]           index
);

  // Default weight vector of neuron i, scaled to W bits.
  function automatic logic [N-1:0][W-1:0] weights_of(int unsigned i);
    logic [N-1:0][W-1:0] v;
    for (int unsigned j = 0; j < N; j++) begin
      logic [7:0] w8;
      w8 = som_pkg::som_weight(i, j);
      if (W >= 8) v[j] = W'({w8, {(W - 8 + 1){1'b0}}} >> 1);
      else        v[j] = W'(w8 >> (8 - W));
    end
    return v;
  endfunction

  logic                           load, ce, ini;
  logic [N-1:0][W-1:0]            x_q;
  logic [M-1:0][DIST_W+IDX_W-1:0] nout;

  som_controller #(.N(N), .M(M)) u_ctrl (
    .clk(clk), .rst(rst), .launch(launch), .load(load), .ce(ce), .ini(ini),
    .busy(busy), .ready(ready), .index(index)
  );

  som_input_regs #(.N(N), .W(W)) u_inregs (
    .clk(clk), .rst(rst), .load(load), .x_in(x), .x_q(x_q)
  );

  for (genvar i = 0; i < M; i++) begin : g_neuron
    som_neuron #(
      .N(N), .W(W), .IDX_W(IDX_W), .INDEX(i), .DIST_W(DIST_W),
      .WEIGHTS(weights_of(i))
    ) u_neuron (
      .clk(clk), .rst(rst), .x(x_q), .out(nout[i])
    );
  end

  som_tree_comparer #(.M(M), .DIST_W(DIST_W), .IDX_W(IDX_W)) u_cmp (
    .clk(clk), .rst(rst), .ce(ce), .ini(ini), .u(nout),
    .min_dist(bmu_dist), .min_idx(bmu_idx)
  );

  som_cluster_rom #(
    .M(M), .IDX_W(IDX_W), .N_CLUSTERS(N_CLUSTERS), .CLUSTER_W(CLUSTER_W)
  ) u_rom (
    .rst(rst), .addr(bmu_idx), .cluster(cluster)
  );

endmodule
