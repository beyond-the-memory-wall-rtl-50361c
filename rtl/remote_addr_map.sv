// remote_addr_map: where a page of a remote allocation lives (Fig. 13).
//
// A device-node's physical address space holds its own local memory at the
// bottom, then its share (half) of the left memory-node, then its share of the
// right memory-node.  For a flit at offset `off` inside a remote allocation:
//   LOCAL    : the whole allocation is in one memory-node (`home` side),
//              node address = base_home + off;
//   BW_AWARE : pages alternate between the two sides, page p going to the
//              left share when p is even and to the right share when p is
//              odd, node address = base_side + (p/2)*PAGE + (off mod PAGE).
// Outputs are the side (0 = left, 1 = right), the flit address inside that
// memory-node group's share, and the same location as a device physical
// address of Fig. 13:  LOCAL_FLITS + side*HALF_FLITS + node address.
//
// In the paper the device driver does this placement when it fills the page
// table; here it is computed in hardware by the copy engine (this design's
// choice), which gives the same placement without modelling a page table.
// Purely combinational.
module remote_addr_map import mcdla_pkg::*; #(
  parameter int unsigned PAGE        = PAGE_FLITS,
  parameter longint unsigned LOCAL_FLITS = 64'd1 << 29,                 // 16 GB device memory
  parameter longint unsigned HALF_FLITS  = (64'd640 << 30) / FLIT_BYTES  // 640 GB = half of 1.3 TB class node
) (
  input  alloc_pol_e pol,
  input  logic       home,
  input  addr_t      base_left,
  input  addr_t      base_right,
  input  addr_t      off,
  output logic       side,
  output addr_t      node_addr,
  output addr_t      dev_paddr,
  output addr_t      page_left    // flits left in this page from off
);
  localparam int unsigned PB = $clog2(PAGE);
  addr_t page_idx, in_page, base;

  assign page_idx  = off >> PB;
  assign in_page   = off & addr_t'(PAGE - 1);
  assign page_left = addr_t'(PAGE) - in_page;

  always_comb begin
    if (pol == POL_BW_AWARE) begin
      side      = page_idx[0];
      base      = side ? base_right : base_left;
      node_addr = base + ((page_idx >> 1) << PB) + in_page;
    end else begin
      side      = home;
      base      = home ? base_right : base_left;
      node_addr = base + off;
    end
    dev_paddr = addr_t'(LOCAL_FLITS) + (side ? addr_t'(HALF_FLITS) : '0) + node_addr;
  end
endmodule
