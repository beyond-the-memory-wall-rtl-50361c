// protocol_engine: link-side packet engine of a memory-node.
//
// A memory-node in the ring sits between two device-nodes (Fig. 9(c),
// Fig. 10): side 0 holds the N/M links to the device-node on one side, side 1
// those to the device-node on the other, link r of each side being part of
// ring r.  Every incoming packet is steered at its head flit and kept on that
// path until its tail flit:
//   * PK_RD_REQ / PK_WR_REQ go to the DMA channel of the same side and link
//     (the group that serves that device-node);
//   * any other packet (device-to-device ring traffic of collective
//     communication) is forwarded to link r of the other side, i.e. to the
//     next node of ring r.
// Each outgoing link therefore has two sources, the DMA responses of its own
// group and the traffic forwarded from the other side; a two-way packet
// arbiter with rotating priority chooses between them and holds the choice
// until the packet's tail.
//
// The paper names the protocol engine and requires that the memory-nodes are
// hops of the collective-communication rings; how packets are steered and
// arbitrated is this design's own.  fwd_pkt and arb_conflict pulse once per
// forwarded packet and per cycle in which both sources of an output wait.
module protocol_engine import mcdla_pkg::*; #(
  parameter int unsigned NLINK = L_PER_GRP
) (
  input  logic  clk,
  input  logic  rst_n,
  // links, index s*NLINK + r
  input  logic  lin_valid  [2*NLINK],
  output logic  lin_ready  [2*NLINK],
  input  flit_t lin_flit   [2*NLINK],
  output logic  lout_valid [2*NLINK],
  input  logic  lout_ready [2*NLINK],
  output flit_t lout_flit  [2*NLINK],
  // DMA channels, same index
  output logic  dreq_valid [2*NLINK],
  input  logic  dreq_ready [2*NLINK],
  output flit_t dreq_flit  [2*NLINK],
  input  logic  drsp_valid [2*NLINK],
  output logic  drsp_ready [2*NLINK],
  input  flit_t drsp_flit  [2*NLINK],
  // event pulses
  output logic  fwd_pkt      [2*NLINK],
  output logic  arb_conflict [2*NLINK]
);
  localparam int unsigned NP = 2 * NLINK;

  logic to_dma   [NP];   // route of the packet on input i
  logic route_q  [NP];
  logic in_pkt   [NP];
  logic fwd_valid[NP];   // input i offers a flit to be forwarded
  logic fwd_ready[NP];

  function automatic int unsigned other(int unsigned i);
    return (i < NLINK) ? i + NLINK : i - NLINK;
  endfunction

  for (genvar i = 0; i < NP; i++) begin : g_in
    pkt_hdr_t h;
    assign h = get_hdr(lin_flit[i]);
    assign to_dma[i] = in_pkt[i] ? route_q[i]
                     : (h.kind == PK_RD_REQ || h.kind == PK_WR_REQ);
    assign dreq_valid[i] = lin_valid[i] && to_dma[i];
    assign dreq_flit[i]  = lin_flit[i];
    assign fwd_valid[i]  = lin_valid[i] && !to_dma[i];
    assign lin_ready[i]  = to_dma[i] ? dreq_ready[i] : fwd_ready[i];
    assign fwd_pkt[i]    = fwd_valid[i] && fwd_ready[i] && lin_flit[i].head;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        in_pkt[i]  <= 1'b0;
        route_q[i] <= 1'b0;
      end else if (lin_valid[i] && lin_ready[i]) begin
        in_pkt[i]  <= !lin_flit[i].tail;
        route_q[i] <= to_dma[i];
      end
    end
  end

  // output arbitration: source 0 = own DMA response, 1 = forwarded traffic
  for (genvar j = 0; j < NP; j++) begin : g_out
    localparam int unsigned SRC = other(j);
    logic locked, owner_q, pri_q, sel;
    logic v0, v1;
    assign v0 = drsp_valid[j];
    assign v1 = fwd_valid[SRC];

    always_comb begin
      if (locked)            sel = owner_q;
      else if (v0 && v1)     sel = pri_q;
      else                   sel = v1;
    end

    assign lout_valid[j]   = sel ? v1 : v0;
    assign lout_flit[j]    = sel ? lin_flit[SRC] : drsp_flit[j];
    assign drsp_ready[j]   = !sel && lout_ready[j];
    assign fwd_ready[SRC]  = sel && lout_ready[j];
    assign arb_conflict[j] = !locked && v0 && v1;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        locked  <= 1'b0;
        owner_q <= 1'b0;
        pri_q   <= 1'b0;
      end else if (lout_valid[j] && lout_ready[j]) begin
        locked  <= !lout_flit[j].tail;
        owner_q <= sel;
        if (lout_flit[j].tail) pri_q <= !sel;   // the other source goes next
      end
    end
  end
endmodule
