// mcdla_system: the ring-based memory-centric system interconnect (Fig. 9(c),
// Fig. 10) with NDEV device-nodes and NDEV memory-nodes.
//
// Device-nodes and memory-nodes alternate around the ring
// D0 - M0 - D1 - M1 - ... - D7 - M7 - D0, and each of the N/2 = 3 rings visits
// the nodes in that order, so every neighbouring pair is joined by 3 links
// (one per ring), each a pair of hb_link instances, one per direction.
// Device-node D_n reaches the right half of M_(n-1) through its links 0..2
// and the left half of M_n through its links 3..5, i.e. 6 x 25 GB/sec of
// memory bandwidth.  Ring messages between device-nodes pass through the
// memory-node between them.
//
// Each device-node is represented by its remote copy engine (dev_remote_dma);
// the accelerator itself (PE array, on-package memory) is outside this design
// and drives the command ports and serves the local-memory ports.  Each
// memory-node's DIMM ports are ports of this module too.  Array index
// [n][s*NLINK + r] is node n, side s, ring r for every per-link port.
module mcdla_system import mcdla_pkg::*; #(
  parameter int unsigned NDEV  = N_DEV,
  parameter int unsigned NLINK = L_PER_GRP,
  parameter int unsigned RDBUF = 128,
  parameter int unsigned LAT   = MEM_LAT,
  parameter int unsigned LBPC  = LINK_BPC,
  parameter int unsigned MBPC  = MEM_BPC
) (
  input  logic      clk,
  input  logic      rst_n,
  // device-node side
  input  logic      cmd_valid [NDEV],
  output logic      cmd_ready [NDEV],
  input  copy_cmd_t cmd       [NDEV],
  output logic      busy      [NDEV],
  output logic      done      [NDEV],
  output logic      lrd_en    [NDEV][2*NLINK],
  output addr_t     lrd_addr  [NDEV][2*NLINK],
  input  data_t     lrd_data  [NDEV][2*NLINK],
  output logic      lwr_en    [NDEV][2*NLINK],
  output addr_t     lwr_addr  [NDEV][2*NLINK],
  output data_t     lwr_data  [NDEV][2*NLINK],
  output logic      msg_rcvd  [NDEV][2*NLINK],
  output logic      side_used [NDEV][2],
  output addr_t     cur_paddr [NDEV],
  // memory-node DIMM ports
  output logic      dimm_req   [NDEV][2*NLINK],
  output logic      dimm_we    [NDEV][2*NLINK],
  output addr_t     dimm_addr  [NDEV][2*NLINK],
  output data_t     dimm_wdata [NDEV][2*NLINK],
  input  data_t     dimm_rdata [NDEV][2*NLINK],
  // events
  output logic      fwd_pkt      [NDEV][2*NLINK],
  output logic      arb_conflict [NDEV][2*NLINK],
  output logic      link_stall   [NDEV][4*NLINK]  // [n][j]: D->M of M_n link j, [n][2L+j]: M->D
);
  localparam int unsigned NP = 2 * NLINK;

  // device engine link signals
  logic  dtx_v [NDEV][NP], dtx_r [NDEV][NP], drx_v [NDEV][NP], drx_r [NDEV][NP];
  flit_t dtx_f [NDEV][NP], drx_f [NDEV][NP];
  // memory-node link signals
  logic  min_v [NDEV][NP], min_r [NDEV][NP], mout_v [NDEV][NP], mout_r [NDEV][NP];
  flit_t min_f [NDEV][NP], mout_f [NDEV][NP];

  for (genvar d = 0; d < NDEV; d++) begin : g_dev
    dev_remote_dma #(.DEV_ID(d), .NDEV(NDEV), .NLINK(NLINK)) u_dev (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[d]), .cmd_ready(cmd_ready[d]), .cmd(cmd[d]),
      .busy(busy[d]), .done(done[d]),
      .tx_valid(dtx_v[d]), .tx_ready(dtx_r[d]), .tx_flit(dtx_f[d]),
      .rx_valid(drx_v[d]), .rx_ready(drx_r[d]), .rx_flit(drx_f[d]),
      .lrd_en(lrd_en[d]), .lrd_addr(lrd_addr[d]), .lrd_data(lrd_data[d]),
      .lwr_en(lwr_en[d]), .lwr_addr(lwr_addr[d]), .lwr_data(lwr_data[d]),
      .msg_rcvd(msg_rcvd[d]), .pkt_side_used(side_used[d]), .cur_paddr(cur_paddr[d]));
  end

  for (genvar n = 0; n < NDEV; n++) begin : g_mem
    memory_node #(.NLINK(NLINK), .NODE_ID(16 + n), .RDBUF(RDBUF), .LAT(LAT), .MBPC(MBPC)) u_mn (
      .clk, .rst_n,
      .lin_valid(min_v[n]), .lin_ready(min_r[n]), .lin_flit(min_f[n]),
      .lout_valid(mout_v[n]), .lout_ready(mout_r[n]), .lout_flit(mout_f[n]),
      .dimm_req(dimm_req[n]), .dimm_we(dimm_we[n]), .dimm_addr(dimm_addr[n]),
      .dimm_wdata(dimm_wdata[n]), .dimm_rdata(dimm_rdata[n]),
      .fwd_pkt(fwd_pkt[n]), .arb_conflict(arb_conflict[n]));

    for (genvar j = 0; j < NP; j++) begin : g_lnk
      // side 0 of M_n faces D_n (its links NLINK..2NLINK-1),
      // side 1 faces D_(n+1) (its links 0..NLINK-1)
      localparam int unsigned DV = (j < NLINK) ? n : (n + 1) % NDEV;
      localparam int unsigned DP = (j < NLINK) ? NLINK + j : j - NLINK;

      hb_link #(.BYTES_PER_CYCLE(LBPC)) u_dm (
        .clk, .rst_n,
        .in_valid(dtx_v[DV][DP]), .in_ready(dtx_r[DV][DP]), .in_flit(dtx_f[DV][DP]),
        .out_valid(min_v[n][j]), .out_ready(min_r[n][j]), .out_flit(min_f[n][j]),
        .stalled(link_stall[n][j]));

      hb_link #(.BYTES_PER_CYCLE(LBPC)) u_md (
        .clk, .rst_n,
        .in_valid(mout_v[n][j]), .in_ready(mout_r[n][j]), .in_flit(mout_f[n][j]),
        .out_valid(drx_v[DV][DP]), .out_ready(drx_r[DV][DP]), .out_flit(drx_f[DV][DP]),
        .stalled(link_stall[n][NP + j]));
    end
  end
endmodule
