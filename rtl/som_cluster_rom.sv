// som_cluster_rom: cluster memory, mapping a neuron index to its cluster.
//
// After training and clustering of the map, each neuron belongs to one
// driving-style cluster. This read-only table, built from LUTs rather than
// block RAM so that it answers in the same cycle, is addressed with the BMU
// index and returns the cluster code. The table is filled at elaboration
// from som_pkg::som_cluster() (synthetic contents unless replaced with the
// trained labels); addresses at or above M return 0. An output selector
// forces the cluster to 0 while rst is high, so nothing stale is shown
// during reset. The address-to-cluster lookup and its LUT realisation are
// the published design; the reset selector's control is this design's
// reading of the output multiplexer whose select line is not labelled.
module som_cluster_rom #(
  parameter int unsigned M          = 121,
  parameter int unsigned IDX_W      = 7,
  parameter int unsigned N_CLUSTERS = 5,
  parameter int unsigned CLUSTER_W  = 3
) (
  input  logic                 rst,
  input  logic [IDX_W-1:0]     addr,
  output logic [CLUSTER_W-1:0] cluster
);

  function automatic logic [M-1:0][CLUSTER_W-1:0] build_table();
    logic [M-1:0][CLUSTER_W-1:0] t;
    for (int unsigned i = 0; i < M; i++)
      t[i] = CLUSTER_W'(som_pkg::som_cluster(i, M, N_CLUSTERS));
    return t;
  endfunction

  localparam logic [M-1:0][CLUSTER_W-1:0] TABLE = build_table();

  logic [CLUSTER_W-1:0] rom_q;

  always_comb begin
    rom_q = '0;
    for (int unsigned i = 0; i < M; i++)
      if (addr == IDX_W'(i)) rom_q = TABLE[i];
  end

  assign cluster = rst ? '0 : rom_q;

endmodule
