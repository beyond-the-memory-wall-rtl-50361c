// tb_remote_addr_map: compares the mapper with an independent reference of
// the Fig. 13 placement for random offsets under both policies.  Under
// BW_AWARE, 2 MB of an allocation must split exactly in half between the two
// sides; under LOCAL it must all be on the home side.
`timescale 1ns/1ps
module tb_remote_addr_map;
  import mcdla_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  alloc_pol_e pol;
  logic home, side;
  addr_t base_left, base_right, off, node_addr, dev_paddr, page_left;
  remote_addr_map dut (.*);

  localparam longint LOCALF = 64'd1 << 29;
  localparam longint HALFF  = (64'd640 << 30) / 32;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e_node, e_pa, pg, inpg;
    int e_side, nl, nr;
    for (int t = 0; t < 2000; t++) begin
      pol = alloc_pol_e'(t % 2);
      home = $urandom % 2;
      base_left  = addr_t'({$urandom % 1024, 7'd0});
      base_right = addr_t'({$urandom % 1024, 7'd0});
      off = addr_t'($urandom % (1 << 20));
      #1;
      pg = longint'(off) / 128; inpg = longint'(off) % 128;
      if (pol == POL_BW_AWARE) begin
        e_side = int'(pg % 2);
        e_node = (e_side ? longint'(base_right) : longint'(base_left)) + (pg / 2) * 128 + inpg;
      end else begin
        e_side = home;
        e_node = (home ? longint'(base_right) : longint'(base_left)) + longint'(off);
      end
      e_pa = LOCALF + (e_side ? HALFF : 0) + e_node;
      check(side == e_side[0], "side");
      check(node_addr == addr_t'(e_node), "node address");
      check(dev_paddr == addr_t'(e_pa), "device physical address");
      check(page_left == addr_t'(128 - inpg), "page remainder");
    end
    // 2 MB = 65536 flits, page by page
    for (int p2 = 0; p2 < 2; p2++) begin
      nl = 0; nr = 0;
      pol = alloc_pol_e'(p2); home = 1; base_left = '0; base_right = '0;
      for (int pg2 = 0; pg2 < 512; pg2++) begin
        off = addr_t'(pg2 * 128); #1;
        if (side) nr++; else nl++;
      end
      if (p2 == 1) check(nl == 256 && nr == 256, $sformatf("BW_AWARE split %0d/%0d", nl, nr));
      else         check(nl == 0 && nr == 512, $sformatf("LOCAL split %0d/%0d", nl, nr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
