// som_axi_lite: AXI4-Lite register interface of the SOM classifier.
//
// The processor exchanges data with the accelerator over AXI4: it writes the
// features of each analysis window, starts a classification and reads back
// the cluster. This slave offers 32-bit registers (byte address):
//   0x00 CTRL    write bit 0 = 1: launch a classification (one-cycle pulse)
//   0x04 STATUS  read  bit 0 = ready (result valid), bit 1 = busy,
//                      bits [15:8] = controller step counter (index)
//   0x08 RESULT  read  bits [7:0] = cluster, bits [31:16] = BMU index
//   0x0C DIST    read  squared distance of the BMU (LSB = 2^-2W)
//   0x10+4j      feature j, read/write, bits [W-1:0]   (j = 0 .. N-1)
// Other addresses read as 0 and ignore writes; every access answers OKAY.
// A write is accepted when address and data are both valid (awready and
// wready rise together for one cycle) and no response is pending; a read is
// accepted when no read data is pending. Responses are registered, so both
// take two cycles. WSTRB is honoured per byte on the feature registers. The
// paper states only that the features and results travel over AXI4; the
// register map, the Lite subset and the handshake timing are this design's.
// rst is synchronous and active high (the inverse of AXI's ARESETn).
module som_axi_lite #(
  parameter int unsigned ADDR_W    = 8,
  parameter int unsigned N         = 4,
  parameter int unsigned W         = 8,
  parameter int unsigned CLUSTER_W = 3,
  parameter int unsigned IDX_W     = 7,
  parameter int unsigned DIST_W    = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]    s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic [3:0]           s_wstrb,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready,
  input  logic [ADDR_W-1:0]    s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  // accelerator side
  output logic                 launch,
  output logic [N-1:0][W-1:0]  x,
  input  logic                 busy,
  input  logic                 ready,
  input  logic [7:0]           index,
  input  logic [CLUSTER_W-1:0] cluster,
  input  logic [IDX_W-1:0]     bmu_idx,
  input  logic [DIST_W-1:0]    bmu_dist
);

  localparam logic [ADDR_W-1:0] A_CTRL   = ADDR_W'('h00);
  localparam logic [ADDR_W-1:0] A_STATUS = ADDR_W'('h04);
  localparam logic [ADDR_W-1:0] A_RESULT = ADDR_W'('h08);
  localparam logic [ADDR_W-1:0] A_DIST   = ADDR_W'('h0C);
  localparam int unsigned       FEAT0    = 'h10;

  logic        wr_go, rd_go;
  logic [31:0] feat_mask;

  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign rd_go     = s_arvalid && !s_rvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_arready = rd_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  // Byte-enable mask from WSTRB.
  always_comb
    for (int b = 0; b < 4; b++) feat_mask[8*b +: 8] = {8{s_wstrb[b]}};

  // Write channel.
  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid <= 1'b0;
      launch   <= 1'b0;
      x        <= '0;
    end else begin
      launch <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        if (s_awaddr == A_CTRL && s_wstrb[0]) launch <= s_wdata[0];
        for (int j = 0; j < N; j++)
          if (s_awaddr == ADDR_W'(FEAT0 + 4 * j))
            x[j] <= W'((32'(x[j]) & ~feat_mask) | (s_wdata & feat_mask));
      end
    end
  end

  // Read channel.
  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_go) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        if (s_araddr == A_STATUS) s_rdata <= {16'd0, index, 6'd0, busy, ready};
        if (s_araddr == A_RESULT)
          s_rdata <= (32'(bmu_idx) << 16) | 32'(cluster);
        if (s_araddr == A_DIST) s_rdata <= 32'(bmu_dist);
        for (int j = 0; j < N; j++)
          if (s_araddr == ADDR_W'(FEAT0 + 4 * j)) s_rdata <= 32'(x[j]);
      end
    end
  end

  // AXI rule: a response, once valid, stays valid and unchanged until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
