// dimm_model: behavioural stand-in for the DDR4 DIMMs behind one memory-node
// group (not synthesizable intent, testbench only).  NPORT SRAM-like ports
// share one array of 2**AW flits, indexed by the low address bits; a read
// returns data on the cycle after the request, a write lands at the clock
// edge.  The array starts at zero.  Latency and bandwidth are applied by
// mem_ctrl, not here.
module dimm_model import mcdla_pkg::*; #(
  parameter int unsigned NPORT = 3,
  parameter int unsigned AW    = 12
) (
  input  logic  clk,
  input  logic  req   [NPORT],
  input  logic  we    [NPORT],
  input  addr_t addr  [NPORT],
  input  data_t wdata [NPORT],
  output data_t rdata [NPORT]
);
  data_t mem [2**AW];
  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      if (req[p] && we[p]) mem[addr[p][AW-1:0]] <= wdata[p];
      if (req[p] && !we[p]) rdata[p] <= mem[addr[p][AW-1:0]];
    end
  end
endmodule
