// local_mem_model: behavioural stand-in for a device-node's own memory
// (on-package HBM), testbench only.  NPORT read ports (data on the next
// cycle) and NPORT write ports share an array of 2**AW flits indexed by the
// low address bits.  The testbench may preload or inspect `mem` directly.
module local_mem_model import mcdla_pkg::*; #(
  parameter int unsigned NPORT = 6,
  parameter int unsigned AW    = 12
) (
  input  logic  clk,
  input  logic  rd_en   [NPORT],
  input  addr_t rd_addr [NPORT],
  output data_t rd_data [NPORT],
  input  logic  wr_en   [NPORT],
  input  addr_t wr_addr [NPORT],
  input  data_t wr_data [NPORT]
);
  data_t mem [2**AW];
  initial for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      if (wr_en[p]) mem[wr_addr[p][AW-1:0]] <= wr_data[p];
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p][AW-1:0]];
    end
  end
endmodule
