// memory_node: one memory-node of the memory-centric system (Fig. 6).
//
// It has N = 6 high-bandwidth links, logically split into M = 2 groups of
// N/M = 3 links.  Group g is used only by the device-node on side g of the
// ring: in the ring of Fig. 10, memory-node M_n serves device-node D_n with
// group 0 and D_(n+1) with group 1, and each device-node sees half of each
// neighbouring memory-node.  Per group there is one DMA unit, one memory
// controller and the group's DIMMs, whose ports leave the module (the DIMMs
// are commodity DDR4 parts outside this design).  The protocol engine
// sends memory requests to the group that owns the link and passes ring
// traffic through to the other side.
//
// Link index s*L_PER_GRP + r is link r (ring r) of side s; DIMM port index
// g*L_PER_GRP + p is port p of group g.  The optional encryption and
// compression ASICs of Fig. 6 are not part of this design.
module memory_node import mcdla_pkg::*; #(
  parameter int unsigned NLINK   = L_PER_GRP,
  parameter int unsigned NODE_ID = 16,
  parameter int unsigned RDBUF   = 128,
  parameter int unsigned LAT     = MEM_LAT,
  parameter int unsigned MBPC    = MEM_BPC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lin_valid  [2*NLINK],
  output logic  lin_ready  [2*NLINK],
  input  flit_t lin_flit   [2*NLINK],
  output logic  lout_valid [2*NLINK],
  input  logic  lout_ready [2*NLINK],
  output flit_t lout_flit  [2*NLINK],
  output logic  dimm_req   [2*NLINK],
  output logic  dimm_we    [2*NLINK],
  output addr_t dimm_addr  [2*NLINK],
  output data_t dimm_wdata [2*NLINK],
  input  data_t dimm_rdata [2*NLINK],
  output logic  fwd_pkt      [2*NLINK],
  output logic  arb_conflict [2*NLINK]
);
  localparam int unsigned NP = 2 * NLINK;

  logic  dreq_valid [NP], dreq_ready [NP];
  flit_t dreq_flit  [NP];
  logic  drsp_valid [NP], drsp_ready [NP];
  flit_t drsp_flit  [NP];

  protocol_engine #(.NLINK(NLINK)) u_pe (
    .clk, .rst_n,
    .lin_valid, .lin_ready, .lin_flit,
    .lout_valid, .lout_ready, .lout_flit,
    .dreq_valid, .dreq_ready, .dreq_flit,
    .drsp_valid, .drsp_ready, .drsp_flit,
    .fwd_pkt, .arb_conflict);

  for (genvar g = 0; g < 2; g++) begin : g_grp
    logic  rxv [NLINK], rxr [NLINK], txv [NLINK], txr [NLINK];
    flit_t rxf [NLINK], txf [NLINK];
    logic  qv [NLINK], qw [NLINK];
    addr_t qa [NLINK];
    data_t qd [NLINK];
    logic  mc_ready [NLINK], mc_rsp_v [NLINK];
    data_t mc_rsp_d [NLINK];
    logic  dq [NLINK], dw [NLINK];
    addr_t da [NLINK];
    data_t dd [NLINK], dr [NLINK];

    for (genvar p = 0; p < NLINK; p++) begin : g_p
      localparam int unsigned I = g * NLINK + p;
      assign rxv[p] = dreq_valid[I];
      assign rxf[p] = dreq_flit[I];
      assign dreq_ready[I] = rxr[p];
      assign drsp_valid[I] = txv[p];
      assign drsp_flit[I]  = txf[p];
      assign txr[p] = drsp_ready[I];
      assign dimm_req[I]   = dq[p];
      assign dimm_we[I]    = dw[p];
      assign dimm_addr[I]  = da[p];
      assign dimm_wdata[I] = dd[p];
      assign dr[p] = dimm_rdata[I];
    end

    dma_unit #(.NLINK(NLINK), .RDBUF(RDBUF), .NODE_ID(NODE_ID)) u_dma (
      .clk, .rst_n,
      .rx_valid(rxv), .rx_ready(rxr), .rx_flit(rxf),
      .tx_valid(txv), .tx_ready(txr), .tx_flit(txf),
      .mreq_valid(qv), .mreq_ready(mc_ready), .mreq_we(qw),
      .mreq_addr(qa), .mreq_wdata(qd),
      .mrsp_valid(mc_rsp_v), .mrsp_data(mc_rsp_d));

    mem_ctrl #(.NPORT(NLINK), .LAT(LAT), .BYTES_PER_CYCLE(MBPC)) u_mc (
      .clk, .rst_n,
      .req_valid(qv), .req_ready(mc_ready), .req_we(qw),
      .req_addr(qa), .req_wdata(qd),
      .rsp_valid(mc_rsp_v), .rsp_data(mc_rsp_d),
      .dimm_req(dq), .dimm_we(dw), .dimm_addr(da), .dimm_wdata(dd),
      .dimm_rdata(dr));
  end
endmodule
