// mcdla_pkg: types and constants shared by the memory-centric deep-learning
// system fabric (memory-nodes, device-side remote DMA engines, ring links).
//
// Numbers that come from the paper: N = 6 high-bandwidth links per node,
// split into M = 2 groups of N/M = 3 links, B = 25 GB/sec per link, a 1 GHz
// clock, 256 GB/sec and 100 cycles of memory-node memory, 8 device-nodes and
// 8 memory-nodes, 47-bit device physical addresses.  The flit size, the
// packet format, the packet and page sizes are this design's own choices.
//
// Addresses inside the fabric count flits (32 bytes), not bytes.
package mcdla_pkg;

  // ---- system shape (paper) ----
  parameter int unsigned N_LINKS   = 6;              // N links per node
  parameter int unsigned M_GROUPS  = 2;              // M groups per memory-node
  parameter int unsigned L_PER_GRP = N_LINKS / M_GROUPS; // N/M = 3 links per group
  parameter int unsigned N_DEV     = 8;              // device-nodes (= memory-nodes)
  parameter int unsigned LINK_BPC  = 25;             // B = 25 GB/s at 1 GHz
  parameter int unsigned MEM_BPC   = 256 / M_GROUPS; // 256 GB/s per memory-node
  parameter int unsigned MEM_LAT   = 100;            // memory access latency, cycles

  // ---- flit / packet format (this design) ----
  parameter int unsigned FLIT_BYTES = 32;
  parameter int unsigned FLIT_W     = 8 * FLIT_BYTES;
  parameter int unsigned ADDR_W     = 42;            // 47-bit byte address / 32-byte flit
  parameter int unsigned LEN_W      = 12;            // payload length in flits
  parameter int unsigned NODE_W     = 5;             // node id: devices 0..7, memory 16..23
  parameter int unsigned PKT_FLITS  = 8;             // max payload flits per packet (256 B)
  parameter int unsigned PAGE_FLITS = 128;           // 4 KB page

  typedef logic [FLIT_W-1:0] data_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [NODE_W-1:0] node_t;

  typedef enum logic [2:0] {
    PK_RD_REQ = 3'd0,   // read len flits at addr (header only)
    PK_WR_REQ = 3'd1,   // write len payload flits at addr
    PK_RD_RSP = 3'd2,   // read data, len payload flits
    PK_WR_ACK = 3'd3,   // write done (header only)
    PK_MSG    = 3'd4    // device-to-device ring message, payload lands at addr
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e kind;
    node_t     src;
    node_t     dst;
    logic [7:0] tag;
    len_t      len;
    addr_t     addr;
  } pkt_hdr_t;

  typedef struct packed {
    logic  head;
    logic  tail;
    data_t data;    // header flit: pkt_hdr_t in the low bits
  } flit_t;

  parameter int unsigned HDR_W = $bits(pkt_hdr_t);

  // copy command of the device-side engine (cudaMemcpyAsync extensions)
  typedef enum logic [1:0] {
    OP_L2R = 2'd0,     // LocalToRemote
    OP_R2L = 2'd1,     // RemoteToLocal
    OP_MSG = 2'd2      // send to a neighbour device-node over the ring
  } copy_op_e;

  typedef enum logic {
    POL_LOCAL    = 1'b0,
    POL_BW_AWARE = 1'b1
  } alloc_pol_e;

  typedef struct packed {
    copy_op_e   op;
    alloc_pol_e pol;
    logic       side;       // LOCAL: home side; MSG: 0 = left, 1 = right neighbour
    addr_t      laddr;      // local (device memory) flit address
    addr_t      roff;       // offset in the allocation (MSG: receiver's address)
    addr_t      base_left;  // allocation base in the left node's share
    addr_t      base_right; // allocation base in the right node's share
    len_t       len;        // flits to move
  } copy_cmd_t;

  function automatic flit_t make_hdr(pkt_hdr_t h);
    flit_t f;
    f.head = 1'b1;
    f.tail = (h.kind == PK_RD_REQ) || (h.kind == PK_WR_ACK);
    f.data = '0;
    f.data[HDR_W-1:0] = h;
    return f;
  endfunction

  function automatic pkt_hdr_t get_hdr(flit_t f);
    return pkt_hdr_t'(f.data[HDR_W-1:0]);
  endfunction

  function automatic node_t mem_node_id(int unsigned n);
    return node_t'(16 + n);
  endfunction

endpackage
