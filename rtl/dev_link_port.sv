// dev_link_port: device-node end of one high-bandwidth link.
//
// Transmit: takes jobs (read request, write request or ring message) and
// sends them as packets.  A read request is a header flit, and its local
// destination address is remembered in an in-order queue.  A write or
// message is a header then len flits read from local device memory: one
// read per cycle, sync read with one cycle of latency, through a four-entry
// staging FIFO.
// Receive: a PK_RD_RSP writes its payload at the address of the oldest queued
// read, a PK_MSG at the address carried in its header (the receive buffer
// of the ring step), and a PK_WR_ACK just reports completion.  Local memory
// writes are always accepted, so the link is never held by the receiver.
// The memory-node answers the requests of one link in order, which is
// what lets the read queue be a FIFO.
//
// Pulses: wr_done (ack received), rd_done (read data fully written),
// msg_sent (message tail sent), msg_rcvd (message fully written).
// This port is the design's own; the paper only requires that the device DMA
// engine drives all N links.
module dev_link_port import mcdla_pkg::*; #(
  parameter int unsigned DEV_ID = 0,
  parameter int unsigned OUTQ   = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // jobs
  input  logic      job_valid,
  output logic      job_ready,
  input  pkt_hdr_t  job,          // kind, dst, addr (remote), len, tag
  input  addr_t     job_laddr,
  // link
  output logic      tx_valid,
  input  logic      tx_ready,
  output flit_t     tx_flit,
  input  logic      rx_valid,
  output logic      rx_ready,
  input  flit_t     rx_flit,
  // local device memory
  output logic      lrd_en,
  output addr_t     lrd_addr,
  input  data_t     lrd_data,
  output logic      lwr_en,
  output addr_t     lwr_addr,
  output data_t     lwr_data,
  // events
  output logic      wr_done,
  output logic      rd_done,
  output logic      msg_sent,
  output logic      msg_rcvd
);
  typedef struct packed { addr_t laddr; } oq_t;

  // ---------------- transmit ----------------
  logic     t_data, t_is_msg;
  addr_t    t_raddr;
  len_t     t_rdleft, t_sendleft;
  logic     lrd_d1;
  logic     st_in_ready, st_out_valid, st_out_ready;
  data_t    st_out;
  logic [2:0] st_count;
  logic     oq_in_valid, oq_in_ready, oq_out_valid, oq_out_ready;
  oq_t      oq_out;
  logic [$clog2(OUTQ+1)-1:0] oq_count;
  pkt_hdr_t hdr;

  always_comb begin
    hdr      = job;
    hdr.src  = node_t'(DEV_ID);
    tx_valid = 1'b0;
    tx_flit  = make_hdr(hdr);
    job_ready   = 1'b0;
    oq_in_valid = 1'b0;
    st_out_ready = 1'b0;
    lrd_en   = 1'b0;
    if (!t_data) begin
      tx_valid    = job_valid && (job.kind != PK_RD_REQ || oq_in_ready);
      job_ready   = tx_valid && tx_ready;
      oq_in_valid = job_ready && job.kind == PK_RD_REQ;
    end else begin
      tx_valid     = st_out_valid;
      tx_flit.head = 1'b0;
      tx_flit.tail = (t_sendleft == len_t'(1));
      tx_flit.data = st_out;
      st_out_ready = tx_ready;
      lrd_en       = (t_rdleft != '0) && ((32'(st_count) + (lrd_d1 ? 1 : 0)) < 4);
    end
  end
  assign lrd_addr = t_raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_data <= 1'b0; t_is_msg <= 1'b0; t_raddr <= '0;
      t_rdleft <= '0; t_sendleft <= '0; lrd_d1 <= 1'b0;
    end else begin
      lrd_d1 <= lrd_en;
      if (!t_data) begin
        if (job_ready && job.kind != PK_RD_REQ) begin
          t_data     <= 1'b1;
          t_is_msg   <= (job.kind == PK_MSG);
          t_raddr    <= job_laddr;
          t_rdleft   <= job.len;
          t_sendleft <= job.len;
        end
      end else begin
        if (lrd_en) begin
          t_raddr  <= t_raddr + 1'b1;
          t_rdleft <= t_rdleft - 1'b1;
        end
        if (tx_valid && tx_ready) begin
          t_sendleft <= t_sendleft - 1'b1;
          if (t_sendleft == len_t'(1)) t_data <= 1'b0;
        end
      end
    end
  end
  assign msg_sent = t_data && t_is_msg && tx_valid && tx_ready && tx_flit.tail;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(4)) u_stage (
    .clk, .rst_n,
    .in_valid(lrd_d1), .in_ready(st_in_ready), .in_data(lrd_data),
    .out_valid(st_out_valid), .out_ready(st_out_ready), .out_data(st_out),
    .count(st_count));

  sync_fifo #(.WIDTH($bits(oq_t)), .DEPTH(OUTQ)) u_outq (
    .clk, .rst_n,
    .in_valid(oq_in_valid), .in_ready(oq_in_ready), .in_data(job_laddr),
    .out_valid(oq_out_valid), .out_ready(oq_out_ready), .out_data(oq_out),
    .count(oq_count));

  // ---------------- receive ----------------
  logic      r_data;
  pkt_kind_e r_kind;
  addr_t     r_addr;
  pkt_hdr_t  rh;
  assign rh       = get_hdr(rx_flit);
  assign rx_ready = 1'b1;
  assign lwr_en   = r_data && rx_valid;
  assign lwr_addr = r_addr;
  assign lwr_data = rx_flit.data;
  assign wr_done  = !r_data && rx_valid && rx_flit.head && rh.kind == PK_WR_ACK;
  assign rd_done  = r_data && rx_valid && rx_flit.tail && r_kind == PK_RD_RSP;
  assign msg_rcvd = r_data && rx_valid && rx_flit.tail && r_kind == PK_MSG;
  assign oq_out_ready = rd_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_data <= 1'b0; r_kind <= PK_RD_RSP; r_addr <= '0;
    end else if (rx_valid) begin
      if (!r_data) begin
        if (rx_flit.head && !rx_flit.tail) begin
          r_data <= 1'b1;
          r_kind <= rh.kind;
          r_addr <= (rh.kind == PK_MSG) ? rh.addr : oq_out.laddr;
        end
      end else begin
        r_addr <= r_addr + 1'b1;
        if (rx_flit.tail) r_data <= 1'b0;
      end
    end
  end

  // a read response needs an outstanding read; staging never overflows
  a_rsp_has_req: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid && !r_data && rx_flit.head && rh.kind == PK_RD_RSP |-> oq_out_valid);
  a_stage_room: assert property (@(posedge clk) disable iff (!rst_n)
    lrd_d1 |-> st_in_ready);
endmodule
