// dev_remote_dma: device-node copy engine for remote (memory-node) memory.
//
// It carries out the copies behind the paper's cudaMemcpyAsync extensions:
// LocalToRemote (OP_L2R), RemoteToLocal (OP_R2L), and sends ring messages
// to a neighbouring device-node (OP_MSG) for collective communication.  The
// node has N = 6 links: links 0..2 go to the left memory-node (ring 0..2)
// and links 3..5 to the right one.  A command of len flits is cut into
// packets of at most PKT flits that never cross a page.  Each packet's place
// comes from remote_addr_map (LOCAL or BW_AWARE, Fig. 13), and the packet is
// queued on the next link of its side in round-robin order.  So a LOCAL copy
// uses the 3 links of one side (N*B/2), and a BW_AWARE copy alternates pages
// between both sides and uses all 6 links (N*B).  A message goes to
// the chosen neighbour over the 3 links of that side; the memory-node
// between them forwards it.  A command completes when every packet is
// acknowledged (L2R), has landed (R2L) or has been sent (MSG); `done` then
// pulses and the next command is accepted.
//
// Interface: cmd_valid/cmd_ready accept one copy_cmd_t; each link has a
// local-memory read port (sync, one cycle) and write port.  The split into
// packets, the page size, the round-robin link choice and the one-command-at-
// a-time rule are this design's own choices.
module dev_remote_dma import mcdla_pkg::*; #(
  parameter int unsigned DEV_ID = 0,
  parameter int unsigned NDEV   = N_DEV,
  parameter int unsigned NLINK  = L_PER_GRP,   // links per side
  parameter int unsigned PKT    = PKT_FLITS,
  parameter int unsigned PAGE   = PAGE_FLITS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  copy_cmd_t cmd,
  output logic      busy,
  output logic      done,
  // links, index s*NLINK + r
  output logic      tx_valid [2*NLINK],
  input  logic      tx_ready [2*NLINK],
  output flit_t     tx_flit  [2*NLINK],
  input  logic      rx_valid [2*NLINK],
  output logic      rx_ready [2*NLINK],
  input  flit_t     rx_flit  [2*NLINK],
  // local memory, one read and one write port per link
  output logic      lrd_en   [2*NLINK],
  output addr_t     lrd_addr [2*NLINK],
  input  data_t     lrd_data [2*NLINK],
  output logic      lwr_en   [2*NLINK],
  output addr_t     lwr_addr [2*NLINK],
  output data_t     lwr_data [2*NLINK],
  output logic      msg_rcvd [2*NLINK],
  output logic      pkt_side_used [2],  // a packet was queued on this side
  output addr_t     cur_paddr           // Fig. 13 device address of that packet
);
  localparam int unsigned NP  = 2 * NLINK;
  localparam int unsigned RRW = (NLINK > 1) ? $clog2(NLINK) : 1;
  localparam int unsigned CW  = 24;

  copy_cmd_t c;
  addr_t     off, laddr;
  len_t      left;
  logic [CW-1:0] issued, completed;
  logic [RRW-1:0] rr [2];

  // per-link job queues
  logic     jq_in_valid [NP], jq_in_ready [NP], jq_out_valid [NP], jq_out_ready [NP];
  logic [HDR_W+ADDR_W-1:0] jq_in, jq_out [NP];
  logic     wr_done [NP], rd_done [NP], msg_sent [NP];
  logic [2:0] jq_count [NP];   // occupancy, not used by the engine

  // mapping of the current offset
  logic  m_side;
  addr_t m_node_addr, m_page_left;
  remote_addr_map #(.PAGE(PAGE)) u_map (
    .pol(c.pol), .home(c.side), .base_left(c.base_left), .base_right(c.base_right),
    .off(off), .side(m_side), .node_addr(m_node_addr), .dev_paddr(cur_paddr),
    .page_left(m_page_left));

  logic     side;
  len_t     plen;
  pkt_hdr_t ph;
  int unsigned tgt;
  logic     push;

  always_comb begin
    side = (c.op == OP_MSG) ? c.side : m_side;
    plen = (left < len_t'(PKT)) ? left : len_t'(PKT);
    if (c.op != OP_MSG && addr_t'(plen) > m_page_left) plen = len_t'(m_page_left);
    ph      = '0;
    ph.len  = plen;
    ph.tag  = issued[7:0];
    unique case (c.op)
      OP_L2R:  ph.kind = PK_WR_REQ;
      OP_R2L:  ph.kind = PK_RD_REQ;
      default: ph.kind = PK_MSG;
    endcase
    if (c.op == OP_MSG) begin
      ph.addr = off;
      ph.dst  = side ? node_t'((DEV_ID + 1) % NDEV) : node_t'((DEV_ID + NDEV - 1) % NDEV);
    end else begin
      ph.addr = m_node_addr;
      ph.dst  = side ? mem_node_id(DEV_ID) : mem_node_id((DEV_ID + NDEV - 1) % NDEV);
    end
    tgt = (side ? NLINK : 0) + int'(rr[side]);
    for (int i = 0; i < NP; i++) jq_in_valid[i] = 1'b0;
    jq_in = {ph, laddr};
    push  = 1'b0;
    if (busy && left != '0) begin
      jq_in_valid[tgt] = 1'b1;
      push = jq_in_ready[tgt];
    end
  end

  // completions this cycle
  logic [3:0] ncomp;
  always_comb begin
    ncomp = '0;
    for (int i = 0; i < NP; i++) begin
      unique case (c.op)
        OP_L2R:  ncomp = ncomp + (wr_done[i]  ? 4'd1 : 4'd0);
        OP_R2L:  ncomp = ncomp + (rd_done[i]  ? 4'd1 : 4'd0);
        default: ncomp = ncomp + (msg_sent[i] ? 4'd1 : 4'd0);
      endcase
    end
  end

  assign cmd_ready = !busy;
  assign done      = busy && left == '0 && issued == completed;
  assign pkt_side_used[0] = push && !side;
  assign pkt_side_used[1] = push && side;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; c <= '0; off <= '0; laddr <= '0; left <= '0;
      issued <= '0; completed <= '0; rr[0] <= '0; rr[1] <= '0;
    end else begin
      if (!busy) begin
        if (cmd_valid) begin
          busy <= 1'b1; c <= cmd; off <= cmd.roff; laddr <= cmd.laddr;
          left <= cmd.len; issued <= '0; completed <= '0;
        end
      end else begin
        completed <= completed + CW'(ncomp);
        if (push) begin
          off    <= off + addr_t'(plen);
          laddr  <= laddr + addr_t'(plen);
          left   <= left - plen;
          issued <= issued + 1'b1;
          rr[side] <= (rr[side] == RRW'(NLINK - 1)) ? '0 : rr[side] + 1'b1;
        end
        if (done) busy <= 1'b0;
      end
    end
  end

  for (genvar i = 0; i < NP; i++) begin : g_link
    pkt_hdr_t jh;
    addr_t    jl;
    assign {jh, jl} = jq_out[i];
    sync_fifo #(.WIDTH(HDR_W + ADDR_W), .DEPTH(4)) u_jq (
      .clk, .rst_n,
      .in_valid(jq_in_valid[i]), .in_ready(jq_in_ready[i]), .in_data(jq_in),
      .out_valid(jq_out_valid[i]), .out_ready(jq_out_ready[i]), .out_data(jq_out[i]),
      .count(jq_count[i]));
    dev_link_port #(.DEV_ID(DEV_ID)) u_port (
      .clk, .rst_n,
      .job_valid(jq_out_valid[i]), .job_ready(jq_out_ready[i]), .job(jh), .job_laddr(jl),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_flit(tx_flit[i]),
      .rx_valid(rx_valid[i]), .rx_ready(rx_ready[i]), .rx_flit(rx_flit[i]),
      .lrd_en(lrd_en[i]), .lrd_addr(lrd_addr[i]), .lrd_data(lrd_data[i]),
      .lwr_en(lwr_en[i]), .lwr_addr(lwr_addr[i]), .lwr_data(lwr_data[i]),
      .wr_done(wr_done[i]), .rd_done(rd_done[i]), .msg_sent(msg_sent[i]),
      .msg_rcvd(msg_rcvd[i]));
  end
endmodule
