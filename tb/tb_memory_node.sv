// tb_memory_node: a whole memory-node with two DIMM models (one per group).
//  * side 0 writes 16 flits through link 0 and reads them back through link
//    1 (both links belong to group 0 and share its DIMMs);
//  * side 1 writes different data at the same addresses through link 2 and
//    reads it back: the two groups are separate memories;
//  * a 5-flit ring message entering side 0 link 2 leaves, unchanged, on
//    side 1 link 2 (same ring, other neighbour), and one entering side 1
//    link 0 leaves on side 0 link 0.
`timescale 1ns/1ps
module tb_memory_node;
  import mcdla_pkg::*;
  localparam int NL = 3, NP = 6;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic  lin_valid [NP], lin_ready [NP], lout_valid [NP], lout_ready [NP];
  flit_t lin_flit [NP], lout_flit [NP];
  logic  dimm_req [NP], dimm_we [NP];
  addr_t dimm_addr [NP];
  data_t dimm_wdata [NP], dimm_rdata [NP];
  logic  fwd_pkt [NP], arb_conflict [NP];
  memory_node #(.NODE_ID(18)) dut (.*);

  for (genvar g = 0; g < 2; g++) begin : g_dimm
    dimm_model #(.NPORT(NL)) u (.clk, .req(dimm_req[g*NL +: NL]), .we(dimm_we[g*NL +: NL]),
      .addr(dimm_addr[g*NL +: NL]), .wdata(dimm_wdata[g*NL +: NL]), .rdata(dimm_rdata[g*NL +: NL]));
  end

  flit_t got [NP][$];
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NP; i++) if (lout_valid[i] && lout_ready[i]) got[i].push_back(lout_flit[i]);

  task automatic send(int l, flit_t f);
    @(negedge clk); lin_valid[l] = 1; lin_flit[l] = f;
    do @(posedge clk); while (!lin_ready[l]);
    #0.1 lin_valid[l] = 0;
  endtask

  task automatic wr(int l, int a, int n, int seed);
    pkt_hdr_t h; flit_t f;
    h = '0; h.kind = PK_WR_REQ; h.src = 5'(l); h.dst = 5'd18; h.len = len_t'(n); h.addr = addr_t'(a);
    send(l, make_hdr(h));
    for (int i = 0; i < n; i++) begin
      f.head = 0; f.tail = (i == n - 1); f.data = {8{32'(seed + i)}};
      send(l, f);
    end
  endtask

  task automatic rd(int l, int a, int n);
    pkt_hdr_t h;
    h = '0; h.kind = PK_RD_REQ; h.src = 5'(l); h.dst = 5'd18; h.len = len_t'(n); h.addr = addr_t'(a);
    send(l, make_hdr(h));
  endtask

  task automatic expect_rd(int l, int n, int seed, string what);
    flit_t f; pkt_hdr_t h;
    wait (got[l].size() >= n + 1);
    f = got[l].pop_front(); h = get_hdr(f);
    check(f.head && h.kind == PK_RD_RSP && h.len == len_t'(n) && h.src == 5'd18, {what, ": header"});
    for (int i = 0; i < n; i++) begin
      f = got[l].pop_front();
      check(f.data == {8{32'(seed + i)}}, $sformatf("%s: word %0d", what, i));
    end
  endtask

  task automatic expect_ack(int l, string what);
    flit_t f;
    wait (got[l].size() >= 1);
    f = got[l].pop_front();
    check(f.head && f.tail && get_hdr(f).kind == PK_WR_ACK, what);
  endtask

  task automatic msg(int l, int n, int seed);
    pkt_hdr_t h; flit_t f;
    h = '0; h.kind = PK_MSG; h.src = 5'(1); h.dst = 5'd2; h.len = len_t'(n); h.addr = 42'h123;
    send(l, make_hdr(h));
    for (int i = 0; i < n; i++) begin
      f.head = 0; f.tail = (i == n - 1); f.data = {8{32'(seed + i)}};
      send(l, f);
    end
  endtask

  task automatic expect_msg(int l, int n, int seed, string what);
    flit_t f;
    wait (got[l].size() >= n + 1);
    f = got[l].pop_front();
    check(f.head && get_hdr(f).kind == PK_MSG && get_hdr(f).addr == 42'h123, {what, ": header"});
    for (int i = 0; i < n; i++) begin
      f = got[l].pop_front();
      check(f.data == {8{32'(seed + i)}} && f.tail == (i == n - 1), $sformatf("%s: word %0d", what, i));
    end
  endtask

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NP; i++) begin lin_valid[i] = 0; lin_flit[i] = '0; lout_ready[i] = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(0, 64, 16, 1000);  expect_ack(0, "group 0 write ack");
    wr(5, 64, 16, 5000);  expect_ack(5, "group 1 write ack");
    rd(1, 64, 16);        expect_rd(1, 16, 1000, "group 0 read via link 1");
    rd(5, 64, 16);        expect_rd(5, 16, 5000, "group 1 read");
    fork
      msg(2, 5, 77);
      msg(3, 5, 99);
    join
    expect_msg(5, 5, 77, "ring message side 0 -> side 1");
    expect_msg(0, 5, 99, "ring message side 1 -> side 0");
    repeat (10) @(posedge clk);
    for (int i = 0; i < NP; i++) check(got[i].size() == 0, $sformatf("link %0d no stray flits", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
