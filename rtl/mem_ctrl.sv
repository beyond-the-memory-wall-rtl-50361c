// mem_ctrl: memory controller of one memory-node group (Fig. 6: DMA unit ->
// memory controller -> memory DIMMs).
//
// The paper models the memory-node DIMMs as a fixed bandwidth (256 GB/sec per
// memory-node, so BYTES_PER_CYCLE = 128 for each of its two groups) and a
// fixed access latency (100 cycles); it gives no DRAM command scheduling.
// This controller implements exactly that model.  It has NPORT request ports
// (one per DMA channel, i.e. per link of the group).  Each cycle it grants
// requests in rotating priority order while its byte-credit counter holds
// FLIT_BYTES per grant (credit += BYTES_PER_CYCLE every cycle).  A granted
// access goes to the DIMM port of the same index at once; the DIMM returns
// read data one cycle later, and the controller delays it so that rsp_valid
// rises exactly LAT cycles after the cycle the request was granted.  The
// delay is a circular buffer of LAT-1 entries per port.  Writes complete at
// grant.  Read responses are never back-pressured: the DMA channel reserves
// buffer space before issuing a read.
//
// The DIMM ports follow a simple SRAM-like protocol (req, we, addr, wdata;
// rdata valid the next cycle), the choice of this design: DDR4 signalling
// belongs to the DIMM side, which is not modelled.
module mem_ctrl import mcdla_pkg::*; #(
  parameter int unsigned NPORT           = L_PER_GRP,
  parameter int unsigned LAT             = MEM_LAT,
  parameter int unsigned BYTES_PER_CYCLE = MEM_BPC
) (
  input  logic  clk,
  input  logic  rst_n,
  // DMA side
  input  logic  req_valid [NPORT],
  output logic  req_ready [NPORT],
  input  logic  req_we    [NPORT],
  input  addr_t req_addr  [NPORT],
  input  data_t req_wdata [NPORT],
  output logic  rsp_valid [NPORT],
  output data_t rsp_data  [NPORT],
  // DIMM side
  output logic  dimm_req   [NPORT],
  output logic  dimm_we    [NPORT],
  output addr_t dimm_addr  [NPORT],
  output data_t dimm_wdata [NPORT],
  input  data_t dimm_rdata [NPORT]
);
  localparam int unsigned D   = LAT - 1;
  localparam int unsigned DPW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned CAP = NPORT * FLIT_BYTES + BYTES_PER_CYCLE;
  localparam int unsigned CW  = $clog2(CAP + BYTES_PER_CYCLE + 1);
  localparam int unsigned PPW = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic [CW-1:0]  credit, credit_next;
  logic [PPW-1:0] rr;
  logic           grant [NPORT];
  logic           rd_d1 [NPORT];
  logic [DPW-1:0] ptr;
  logic           dvalid [NPORT][D];
  data_t          dbuf   [NPORT][D];

  // rotating-priority grant under the bandwidth credit
  always_comb begin
    int unsigned avail;
    int unsigned p;
    avail = int'(credit);
    for (int i = 0; i < NPORT; i++) grant[i] = 1'b0;
    for (int i = 0; i < NPORT; i++) begin
      p = (int'(rr) + i) % NPORT;
      if (req_valid[p] && avail >= FLIT_BYTES) begin
        grant[p] = 1'b1;
        avail    = avail - FLIT_BYTES;
      end
    end
    credit_next = CW'(avail + BYTES_PER_CYCLE);
    if (credit_next > CW'(CAP)) credit_next = CW'(CAP);
  end

  for (genvar i = 0; i < NPORT; i++) begin : g_port
    assign req_ready[i]  = grant[i];
    assign dimm_req[i]   = grant[i];
    assign dimm_we[i]    = req_we[i];
    assign dimm_addr[i]  = req_addr[i];
    assign dimm_wdata[i] = req_wdata[i];
    // delayed read data: entry written D cycles ago at this pointer
    assign rsp_valid[i]  = dvalid[i][ptr];
    assign rsp_data[i]   = dbuf[i][ptr];

    always_ff @(posedge clk) dbuf[i][ptr] <= dimm_rdata[i];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_d1[i] <= 1'b0;
        for (int k = 0; k < D; k++) dvalid[i][k] <= 1'b0;
      end else begin
        rd_d1[i]       <= grant[i] && !req_we[i];
        dvalid[i][ptr] <= rd_d1[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit <= CW'(CAP);
      rr     <= '0;
      ptr    <= '0;
    end else begin
      credit <= credit_next;
      rr     <= (rr == PPW'(NPORT - 1)) ? '0 : rr + 1'b1;
      ptr    <= (ptr == DPW'(D - 1)) ? '0 : ptr + 1'b1;
    end
  end
endmodule
