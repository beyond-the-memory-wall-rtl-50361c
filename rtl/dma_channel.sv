// dma_channel: one link's worth of the memory-node DMA unit.
//
// Requests arrive as packets from the protocol engine: PK_RD_REQ (header
// only) or PK_WR_REQ (header + len payload flits).  A write streams its
// payload into the memory controller at addr, addr+1, ... and then queues a
// PK_WR_ACK.  A read queues a PK_RD_RSP descriptor and issues len flit reads,
// one per cycle, but only while the read-data buffer has room for every read
// in flight (reads take the memory controller's fixed latency and are never
// back-pressured).  The response side sends the queued descriptors in order:
// a header flit, then, for reads, len data flits from the buffer.  Several
// reads may be in flight at once, which is what lets one link stay busy
// across the 100-cycle memory latency.
//
// The paper says only that the DMA engine forwards a device-node's transfer
// request to the memory controller; the packet format, the in-order
// response queue and the buffer depth (RDBUF = 128 flits, enough for the
// 100-cycle latency at link rate) are this design's choices.
module dma_channel import mcdla_pkg::*; #(
  parameter int unsigned RDBUF   = 128,
  parameter int unsigned DESCQ   = 16,
  parameter int unsigned NODE_ID = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  // request packets in
  input  logic  rx_valid,
  output logic  rx_ready,
  input  flit_t rx_flit,
  // response packets out
  output logic  tx_valid,
  input  logic  tx_ready,
  output flit_t tx_flit,
  // memory controller port
  output logic  mreq_valid,
  input  logic  mreq_ready,
  output logic  mreq_we,
  output addr_t mreq_addr,
  output data_t mreq_wdata,
  input  logic  mrsp_valid,
  input  data_t mrsp_data
);
  localparam int unsigned BW = $clog2(RDBUF + 1);

  typedef enum logic [1:0] {Q_IDLE, Q_RD, Q_WR} req_st_e;
  req_st_e  rst_q;
  addr_t    cur_addr;
  len_t     cur_left;
  pkt_hdr_t rx_hdr;

  // response descriptors
  logic     dq_in_valid, dq_in_ready, dq_out_valid, dq_out_ready;
  pkt_hdr_t dq_in, dq_out;
  logic [$clog2(DESCQ+1)-1:0] dq_count;

  // read data buffer
  logic  rb_in_ready, rb_out_valid, rb_out_ready;
  data_t rb_out;
  logic [BW-1:0] rb_count, inflight;

  logic rd_issue;
  logic resp_data;         // response side is sending data flits
  len_t resp_left;

  assign rx_hdr = get_hdr(rx_flit);

  // ---------------- request side ----------------
  always_comb begin
    rx_ready    = 1'b0;
    mreq_valid  = 1'b0;
    mreq_we     = 1'b0;
    mreq_addr   = cur_addr;
    mreq_wdata  = rx_flit.data;
    dq_in_valid = 1'b0;
    rd_issue    = 1'b0;
    unique case (rst_q)
      Q_IDLE: begin
        // accept a header only when its response can be queued
        rx_ready = dq_in_ready;
        if (rx_valid && rx_flit.head && rx_hdr.kind == PK_RD_REQ) begin
          dq_in_valid = 1'b1;
        end
      end
      Q_RD: begin
        mreq_valid = (32'(inflight) + 32'(rb_count)) < RDBUF;
        rd_issue   = mreq_valid && mreq_ready;
      end
      Q_WR: begin
        mreq_valid = rx_valid && (!rx_flit.tail || dq_in_ready);
        mreq_we    = 1'b1;
        rx_ready   = mreq_ready && (!rx_flit.tail || dq_in_ready);
        if (rx_valid && rx_ready && rx_flit.tail) begin
          dq_in_valid = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // header of the write being received, kept for its acknowledgement
  pkt_hdr_t wr_hdr;
  always_comb if (rst_q == Q_WR) begin
    dq_in      = wr_hdr;
    dq_in.kind = PK_WR_ACK;
  end else begin
    dq_in      = rx_hdr;
    dq_in.kind = PK_RD_RSP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q    <= Q_IDLE;
      cur_addr <= '0;
      cur_left <= '0;
      wr_hdr   <= '0;
    end else begin
      unique case (rst_q)
        Q_IDLE: if (rx_valid && rx_ready && rx_flit.head) begin
          cur_addr <= rx_hdr.addr;
          cur_left <= rx_hdr.len;
          wr_hdr   <= rx_hdr;
          if (rx_hdr.kind == PK_RD_REQ && rx_hdr.len != '0) rst_q <= Q_RD;
          else if (rx_hdr.kind == PK_WR_REQ) rst_q <= Q_WR;
        end
        Q_RD: if (rd_issue) begin
          cur_addr <= cur_addr + 1'b1;
          cur_left <= cur_left - 1'b1;
          if (cur_left == len_t'(1)) rst_q <= Q_IDLE;
        end
        Q_WR: if (rx_valid && rx_ready) begin
          cur_addr <= cur_addr + 1'b1;
          if (rx_flit.tail) rst_q <= Q_IDLE;
        end
        default: rst_q <= Q_IDLE;
      endcase
    end
  end

  // in-flight reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + (rd_issue ? 1'b1 : 1'b0) - (mrsp_valid ? 1'b1 : 1'b0);
  end

  sync_fifo #(.WIDTH(HDR_W), .DEPTH(DESCQ)) u_descq (
    .clk, .rst_n,
    .in_valid(dq_in_valid), .in_ready(dq_in_ready), .in_data(dq_in),
    .out_valid(dq_out_valid), .out_ready(dq_out_ready), .out_data(dq_out),
    .count(dq_count));

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(RDBUF)) u_rdbuf (
    .clk, .rst_n,
    .in_valid(mrsp_valid), .in_ready(rb_in_ready), .in_data(mrsp_data),
    .out_valid(rb_out_valid), .out_ready(rb_out_ready), .out_data(rb_out),
    .count(rb_count));

  // ---------------- response side ----------------
  pkt_hdr_t rsp_hdr;
  always_comb begin
    rsp_hdr      = dq_out;
    rsp_hdr.src  = node_t'(NODE_ID);
    rsp_hdr.dst  = dq_out.src;
    tx_valid     = 1'b0;
    tx_flit      = make_hdr(rsp_hdr);
    dq_out_ready = 1'b0;
    rb_out_ready = 1'b0;
    if (!resp_data) begin
      tx_valid = dq_out_valid;
      if (dq_out.kind == PK_RD_RSP && dq_out.len != '0) tx_flit.tail = 1'b0;
      else dq_out_ready = tx_ready;            // header-only: done
    end else begin
      tx_valid     = rb_out_valid;
      tx_flit.head = 1'b0;
      tx_flit.tail = (resp_left == len_t'(1));
      tx_flit.data = rb_out;
      rb_out_ready = tx_ready;
      dq_out_ready = tx_ready && rb_out_valid && (resp_left == len_t'(1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_data <= 1'b0;
      resp_left <= '0;
    end else if (!resp_data) begin
      if (tx_valid && tx_ready && !tx_flit.tail) begin
        resp_data <= 1'b1;
        resp_left <= dq_out.len;
      end
    end else if (tx_valid && tx_ready) begin
      resp_left <= resp_left - 1'b1;
      if (resp_left == len_t'(1)) resp_data <= 1'b0;
    end
  end

  // the buffer never overflows: reads are issued only against free space
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                   mrsp_valid |-> rb_in_ready);
endmodule
