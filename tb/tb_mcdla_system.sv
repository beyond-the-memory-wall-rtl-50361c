// tb_mcdla_system: end-to-end run of the full system at its default size
// (8 device-nodes, 8 memory-nodes, 3 rings, 96 link directions, 100-cycle
// memory).  Every device-node, all at once:
//   A. LocalToRemote, BW_AWARE, 2 pages: checked word by word in the DIMMs of
//      both neighbouring memory-nodes (even page left, odd page right);
//   B. RemoteToLocal, BW_AWARE, back into another buffer: checked;
//   C. LocalToRemote, LOCAL, 2 pages (even devices to the right node, odd
//      to the left): checked in the DIMMs;
//   D/E. a ring step of collective communication: half of the devices send
//      a 64-flit message to their right neighbour through the memory-node
//      between them while the receivers read remote data from that same
//      memory-node (LOCAL, left), so forwarded messages and read responses
//      compete for the same links; then the roles swap.  Every message
//      must land at the receiver's buffer and every read must be correct.
// Mechanisms counted (each must occur): BW_AWARE and LOCAL placement, both
// copy directions, ring messages, pass-through forwarding in memory-nodes,
// arbitration conflicts between responses and forwarded traffic, and link
// bandwidth stalls.
`timescale 1ns/1ps
module tb_mcdla_system;
  import mcdla_pkg::*;
  localparam int ND = N_DEV, NL = L_PER_GRP, NP = 2 * L_PER_GRP;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic      cmd_valid [ND], cmd_ready [ND], busy [ND], done [ND];
  copy_cmd_t cmd [ND];
  logic      lrd_en [ND][NP], lwr_en [ND][NP], msg_rcvd [ND][NP], side_used [ND][2];
  addr_t     lrd_addr [ND][NP], lwr_addr [ND][NP], cur_paddr [ND];
  data_t     lrd_data [ND][NP], lwr_data [ND][NP];
  logic      dimm_req [ND][NP], dimm_we [ND][NP];
  addr_t     dimm_addr [ND][NP];
  data_t     dimm_wdata [ND][NP], dimm_rdata [ND][NP];
  logic      fwd_pkt [ND][NP], arb_conflict [ND][NP], link_stall [ND][2*NP];

  mcdla_system dut (.*);

  for (genvar n = 0; n < ND; n++) begin : g_n
    local_mem_model #(.NPORT(NP)) lm (.clk, .rd_en(lrd_en[n]), .rd_addr(lrd_addr[n]), .rd_data(lrd_data[n]),
      .wr_en(lwr_en[n]), .wr_addr(lwr_addr[n]), .wr_data(lwr_data[n]));
    for (genvar g = 0; g < 2; g++) begin : g_g
      dimm_model #(.NPORT(NL)) u (.clk, .req(dimm_req[n][g*NL +: NL]), .we(dimm_we[n][g*NL +: NL]),
        .addr(dimm_addr[n][g*NL +: NL]), .wdata(dimm_wdata[n][g*NL +: NL]), .rdata(dimm_rdata[n][g*NL +: NL]));
    end
  end

  // mechanism counters
  int n_bw, n_local, n_l2r, n_r2l, n_msg, n_fwd, n_conf, n_stall, n_msgrx, n_left, n_right;
  always @(posedge clk) if (rst_n)
    for (int n = 0; n < ND; n++) begin
      for (int j = 0; j < NP; j++) begin
        if (fwd_pkt[n][j]) n_fwd++;
        if (arb_conflict[n][j]) n_conf++;
        if (msg_rcvd[n][j]) n_msgrx++;
      end
      for (int j = 0; j < 2 * NP; j++) if (link_stall[n][j]) n_stall++;
      if (side_used[n][0]) n_left++;
      if (side_used[n][1]) n_right++;
    end

  function automatic data_t pat(int d, int i); return {8{32'(d * 32'h0100_0000 + i)}}; endfunction

  // read a word of a memory-node group's DIMMs
  function automatic data_t dimm_word(int n, int g, int a);
    data_t w;
    w = '0;
    for (int k = 0; k < ND; k++) if (k == n) begin
      case (k)
        0: w = g ? g_n[0].g_g[1].u.mem[a] : g_n[0].g_g[0].u.mem[a];
        1: w = g ? g_n[1].g_g[1].u.mem[a] : g_n[1].g_g[0].u.mem[a];
        2: w = g ? g_n[2].g_g[1].u.mem[a] : g_n[2].g_g[0].u.mem[a];
        3: w = g ? g_n[3].g_g[1].u.mem[a] : g_n[3].g_g[0].u.mem[a];
        4: w = g ? g_n[4].g_g[1].u.mem[a] : g_n[4].g_g[0].u.mem[a];
        5: w = g ? g_n[5].g_g[1].u.mem[a] : g_n[5].g_g[0].u.mem[a];
        6: w = g ? g_n[6].g_g[1].u.mem[a] : g_n[6].g_g[0].u.mem[a];
        default: w = g ? g_n[7].g_g[1].u.mem[a] : g_n[7].g_g[0].u.mem[a];
      endcase
    end
    return w;
  endfunction
  function automatic data_t local_word(int n, int a);
    case (n)
      0: return g_n[0].lm.mem[a];  1: return g_n[1].lm.mem[a];
      2: return g_n[2].lm.mem[a];  3: return g_n[3].lm.mem[a];
      4: return g_n[4].lm.mem[a];  5: return g_n[5].lm.mem[a];
      6: return g_n[6].lm.mem[a];  default: return g_n[7].lm.mem[a];
    endcase
  endfunction

  task automatic run(int d, copy_op_e op, alloc_pol_e pol, logic sd, int la, int ro, int bl, int br, int n);
    @(negedge clk);
    cmd[d] = '0; cmd[d].op = op; cmd[d].pol = pol; cmd[d].side = sd; cmd[d].laddr = addr_t'(la);
    cmd[d].roff = addr_t'(ro); cmd[d].base_left = addr_t'(bl); cmd[d].base_right = addr_t'(br);
    cmd[d].len = len_t'(n);
    cmd_valid[d] = 1;
    do @(posedge clk); while (!cmd_ready[d]);
    #0.1 cmd_valid[d] = 0;
    if (pol == POL_BW_AWARE && op != OP_MSG) n_bw++; else if (op != OP_MSG) n_local++;
    if (op == OP_L2R) n_l2r++; else if (op == OP_R2L) n_r2l++; else n_msg++;
    do @(posedge clk); while (!done[d]);
  endtask

  // D/E: devices of parity `snd` send, the others read from their left node
  task automatic ring_step(int d, int snd);
    if (d % 2 == snd) run(d, OP_MSG, POL_LOCAL, 1, 0, 2048, 0, 0, 64);
    else              run(d, OP_R2L, POL_LOCAL, 0, 3072, 0, 0, 0, 256);
  endtask

  initial begin
    #1000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ndone = 0;
  initial begin
    int bad, t0;
    {n_bw, n_local, n_l2r, n_r2l, n_msg, n_fwd, n_conf, n_stall, n_msgrx, n_left, n_right} = '0;
    for (int d = 0; d < ND; d++) begin cmd_valid[d] = 0; cmd[d] = '0; end
    for (int i = 0; i < 256; i++) begin
      g_n[0].lm.mem[i] = pat(0, i); g_n[1].lm.mem[i] = pat(1, i);
      g_n[2].lm.mem[i] = pat(2, i); g_n[3].lm.mem[i] = pat(3, i);
      g_n[4].lm.mem[i] = pat(4, i); g_n[5].lm.mem[i] = pat(5, i);
      g_n[6].lm.mem[i] = pat(6, i); g_n[7].lm.mem[i] = pat(7, i);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A: BW_AWARE LocalToRemote, 2 pages per device, all devices at once
    t0 = cyc;
    for (int d = 0; d < ND; d++) fork automatic int dd = d; begin run(dd, OP_L2R, POL_BW_AWARE, 0, 0, 0, 0, 0, 256); ndone++; end join_none
    wait (ndone == ND); ndone = 0;
    for (int d = 0; d < ND; d++) begin
      bad = 0;
      for (int w = 0; w < 128; w++) begin
        // page 0 -> left node M_(d-1), group 1; page 1 -> right node M_d, group 0
        if (dimm_word((d + ND - 1) % ND, 1, w) != pat(d, w)) bad++;
        if (dimm_word(d, 0, w) != pat(d, 128 + w)) bad++;
      end
      check(bad == 0, $sformatf("A: device %0d BW_AWARE placement, %0d wrong", d, bad));
    end
    $display("A done at cycle %0d", cyc);
    // rate: 256 data + 32 header flits over N = 6 links of 25 B/cycle is at
    // least 288*32/150 = 61.4 cycles; link, DMA and memory-controller
    // pipeline stages add a few tens of cycles
    check(cyc - t0 >= 61 && cyc - t0 <= 110, $sformatf("A took %0d cycles, expected 61..110", cyc - t0));

    // B: BW_AWARE RemoteToLocal back to local 1024
    t0 = cyc;
    for (int d = 0; d < ND; d++) fork automatic int dd = d; begin run(dd, OP_R2L, POL_BW_AWARE, 0, 1024, 0, 0, 0, 256); ndone++; end join_none
    wait (ndone == ND); ndone = 0;
    for (int d = 0; d < ND; d++) begin
      bad = 0;
      for (int i = 0; i < 256; i++) if (local_word(d, 1024 + i) != pat(d, i)) bad++;
      check(bad == 0, $sformatf("B: device %0d RemoteToLocal, %0d wrong", d, bad));
    end
    $display("B done at cycle %0d", cyc);
    // a read pays the 100-cycle memory latency once, then streams at 150 B/cycle
    check(cyc - t0 >= 161 && cyc - t0 <= 230, $sformatf("B took %0d cycles, expected 161..230", cyc - t0));

    // C: LOCAL LocalToRemote, even devices right (base 512), odd left (base 512)
    for (int d = 0; d < ND; d++) fork automatic int dd = d; begin run(dd, OP_L2R, POL_LOCAL, (dd % 2 == 0), 0, 0, 512, 512, 256); ndone++; end join_none
    wait (ndone == ND); ndone = 0;
    for (int d = 0; d < ND; d++) begin
      bad = 0;
      for (int i = 0; i < 256; i++)
        if ((d % 2 == 0 ? dimm_word(d, 0, 512 + i) : dimm_word((d + ND - 1) % ND, 1, 512 + i)) != pat(d, i)) bad++;
      check(bad == 0, $sformatf("C: device %0d LOCAL placement, %0d wrong", d, bad));
    end
    $display("C done at cycle %0d", cyc);

    // D and E: ring steps with competing memory traffic
    for (int snd = 0; snd < 2; snd++) begin
      for (int d = 0; d < ND; d++) fork automatic int dd = d; begin ring_step(dd, snd); ndone++; end join_none
      wait (ndone == ND); ndone = 0;
      for (int d = 0; d < ND; d++) begin
        bad = 0;
        if (d % 2 != snd) begin
          // receiver: message from the left neighbour, and its own read of the left node
          for (int i = 0; i < 64; i++) if (local_word(d, 2048 + i) != pat((d + ND - 1) % ND, i)) bad++;
          for (int i = 0; i < 256; i++)
            if (local_word(d, 3072 + i) != dimm_word((d + ND - 1) % ND, 1, i)) bad++;
          check(bad == 0, $sformatf("ring step %0d: device %0d, %0d wrong", snd, d, bad));
        end
      end
      $display("ring step %0d done at cycle %0d", snd, cyc);
    end

    $display("mechanisms: bw_aware=%0d local=%0d l2r=%0d r2l=%0d msg=%0d fwd=%0d conflict=%0d stall=%0d msg_rx=%0d left_pkts=%0d right_pkts=%0d",
             n_bw, n_local, n_l2r, n_r2l, n_msg, n_fwd, n_conf, n_stall, n_msgrx, n_left, n_right);
    check(n_bw > 0, "BW_AWARE never used");
    check(n_local > 0, "LOCAL never used");
    check(n_l2r > 0 && n_r2l > 0, "a copy direction never used");
    check(n_msg == ND, "ring messages");
    check(n_fwd == ND * 8, $sformatf("forwarded packets %0d, expected %0d", n_fwd, ND * 8));
    check(n_msgrx == ND * 8, $sformatf("received message packets %0d", n_msgrx));
    check(n_conf > 0, "no arbitration conflict between responses and forwarded traffic");
    check(n_stall > 0, "no link bandwidth stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
