// hb_link: one direction of a high-bandwidth device-side link (an NVLINK-like
// point-to-point link between a device-node and a memory-node).
//
// The paper gives each link B = 25 GB/sec per direction, clocked here at the
// 1 GHz of its device configuration, i.e. 25 bytes per cycle.  Flits are 32
// bytes (this design's choice), so the link is paced by a byte-credit
// counter: every cycle BYTES_PER_CYCLE credits are added, a flit may leave
// when FLIT_BYTES credits are present and costs FLIT_BYTES.  Back-to-back
// traffic therefore moves exactly 25/32 flit per cycle.  The credit count is
// capped at FLIT_BYTES + BYTES_PER_CYCLE - 1 so that an idle link builds no
// burst.  The link holds one flit in a register (latency 1 cycle when
// credits are present); the SerDes/PHY itself is not modelled.
//
// Interface: valid/ready on both sides; in_ready does not depend on in_valid.
module hb_link import mcdla_pkg::*; #(
  parameter int unsigned BYTES_PER_CYCLE = LINK_BPC,
  parameter int unsigned FLIT_BYTES_P    = FLIT_BYTES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit,
  output logic  stalled     // a flit waits for link credits this cycle
);
  localparam int unsigned CAP = FLIT_BYTES_P + BYTES_PER_CYCLE - 1;
  localparam int unsigned CW  = $clog2(CAP + BYTES_PER_CYCLE + 1);

  logic [CW-1:0] credit, credit_after;
  logic full, can_send, fire;

  assign can_send  = (credit >= CW'(FLIT_BYTES_P));
  assign out_valid = full && can_send;
  assign fire      = out_valid && out_ready;
  assign in_ready  = !full || fire;
  assign stalled   = full && !can_send;

  always_comb begin
    credit_after = credit + CW'(BYTES_PER_CYCLE) - (fire ? CW'(FLIT_BYTES_P) : '0);
    if (credit_after > CW'(CAP)) credit_after = CW'(CAP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= 1'b0;
      credit <= CW'(FLIT_BYTES_P);
      out_flit <= '0;
    end else begin
      credit <= credit_after;
      if (in_valid && in_ready) begin
        full     <= 1'b1;
        out_flit <= in_flit;
      end else if (fire) begin
        full <= 1'b0;
      end
    end
  end

  // a flit offered to the receiver stays until taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid && !out_ready |=> out_valid && $stable(out_flit));
endmodule
