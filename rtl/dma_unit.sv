// dma_unit: the DMA unit of one memory-node group (Fig. 6).  A group owns
// N/M = 3 links and serves one device-node only; the unit holds one
// dma_channel per link so that the three links are served in parallel and
// the group reaches (N/M) x B = 75 GB/sec.  Each channel has its own port
// on the group's memory controller.  See dma_channel for the packet
// handling.  One channel per link is this design's choice; the paper
// names one DMA unit per group and its function only.
module dma_unit import mcdla_pkg::*; #(
  parameter int unsigned NLINK   = L_PER_GRP,
  parameter int unsigned RDBUF   = 128,
  parameter int unsigned NODE_ID = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rx_valid [NLINK],
  output logic  rx_ready [NLINK],
  input  flit_t rx_flit  [NLINK],
  output logic  tx_valid [NLINK],
  input  logic  tx_ready [NLINK],
  output flit_t tx_flit  [NLINK],
  output logic  mreq_valid [NLINK],
  input  logic  mreq_ready [NLINK],
  output logic  mreq_we    [NLINK],
  output addr_t mreq_addr  [NLINK],
  output data_t mreq_wdata [NLINK],
  input  logic  mrsp_valid [NLINK],
  input  data_t mrsp_data  [NLINK]
);
  for (genvar i = 0; i < NLINK; i++) begin : g_ch
    dma_channel #(.RDBUF(RDBUF), .NODE_ID(NODE_ID)) u_ch (
      .clk, .rst_n,
      .rx_valid(rx_valid[i]), .rx_ready(rx_ready[i]), .rx_flit(rx_flit[i]),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_flit(tx_flit[i]),
      .mreq_valid(mreq_valid[i]), .mreq_ready(mreq_ready[i]), .mreq_we(mreq_we[i]),
      .mreq_addr(mreq_addr[i]), .mreq_wdata(mreq_wdata[i]),
      .mrsp_valid(mrsp_valid[i]), .mrsp_data(mrsp_data[i]));
  end
endmodule
