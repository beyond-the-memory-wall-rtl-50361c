// tb_dev_remote_dma: device-node D1's copy engine between its two
// neighbouring memory-nodes M0 (left) and M1 (right), joined by hb_link
// pairs so that link bandwidth is real.
//  1. BW_AWARE LocalToRemote of 4 pages: even pages must land in M0's
//     group-1 DIMMs, odd pages in M1's group-0 DIMMs, packed per Fig. 13.
//  2. BW_AWARE RemoteToLocal of the same 4 pages back to another local
//     buffer: must equal the original.
//  3. LOCAL LocalToRemote of 4 pages to the right node only: all data in M1,
//     no packet on the left side, and about twice the time of case 1
//     (3 links instead of 6): 576 flits / 3 links * 32/25 = 246 cycles.
//  4. A ring message to the right neighbour leaves M1 on its far side with
//     its payload and receive address.
`timescale 1ns/1ps
module tb_dev_remote_dma;
  import mcdla_pkg::*;
  localparam int NL = 3, NP = 6;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // device engine
  logic cmd_valid, cmd_ready, busy, done;
  copy_cmd_t cmd;
  logic  dtx_v [NP], dtx_r [NP], drx_v [NP], drx_r [NP];
  flit_t dtx_f [NP], drx_f [NP];
  logic  lrd_en [NP], lwr_en [NP], msg_rcvd [NP], side_used [2];
  addr_t lrd_addr [NP], lwr_addr [NP], cur_paddr;
  data_t lrd_data [NP], lwr_data [NP];
  dev_remote_dma #(.DEV_ID(1)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .done,
    .tx_valid(dtx_v), .tx_ready(dtx_r), .tx_flit(dtx_f),
    .rx_valid(drx_v), .rx_ready(drx_r), .rx_flit(drx_f),
    .lrd_en, .lrd_addr, .lrd_data, .lwr_en, .lwr_addr, .lwr_data, .msg_rcvd,
    .pkt_side_used(side_used), .cur_paddr);
  local_mem_model #(.NPORT(NP)) lm (.clk, .rd_en(lrd_en), .rd_addr(lrd_addr), .rd_data(lrd_data),
    .wr_en(lwr_en), .wr_addr(lwr_addr), .wr_data(lwr_data));

  // two memory-nodes; index 0 = M0 (left), 1 = M1 (right)
  logic  mi_v [2][NP], mi_r [2][NP], mo_v [2][NP], mo_r [2][NP];
  flit_t mi_f [2][NP], mo_f [2][NP];
  logic  dq [2][NP], dw [2][NP], fw [2][NP], ac [2][NP];
  addr_t da [2][NP];
  data_t dd [2][NP], dr [2][NP];
  flit_t far_q [$];     // flits leaving M1 away from D1

  for (genvar m = 0; m < 2; m++) begin : g_m
    memory_node #(.NODE_ID(16 + m)) u_mn (.clk, .rst_n,
      .lin_valid(mi_v[m]), .lin_ready(mi_r[m]), .lin_flit(mi_f[m]),
      .lout_valid(mo_v[m]), .lout_ready(mo_r[m]), .lout_flit(mo_f[m]),
      .dimm_req(dq[m]), .dimm_we(dw[m]), .dimm_addr(da[m]), .dimm_wdata(dd[m]), .dimm_rdata(dr[m]),
      .fwd_pkt(fw[m]), .arb_conflict(ac[m]));
    for (genvar g = 0; g < 2; g++) begin : g_d
      dimm_model #(.NPORT(NL)) u (.clk, .req(dq[m][g*NL +: NL]), .we(dw[m][g*NL +: NL]),
        .addr(da[m][g*NL +: NL]), .wdata(dd[m][g*NL +: NL]), .rdata(dr[m][g*NL +: NL]));
    end
  end

  // D1 links 0..2 <-> M0 side 1; D1 links 3..5 <-> M1 side 0
  for (genvar r = 0; r < NL; r++) begin : g_l
    logic s0, s1, s2, s3;
    hb_link u_l_dm (.clk, .rst_n, .in_valid(dtx_v[r]), .in_ready(dtx_r[r]), .in_flit(dtx_f[r]),
      .out_valid(mi_v[0][NL + r]), .out_ready(mi_r[0][NL + r]), .out_flit(mi_f[0][NL + r]), .stalled(s0));
    hb_link u_l_md (.clk, .rst_n, .in_valid(mo_v[0][NL + r]), .in_ready(mo_r[0][NL + r]), .in_flit(mo_f[0][NL + r]),
      .out_valid(drx_v[r]), .out_ready(drx_r[r]), .out_flit(drx_f[r]), .stalled(s1));
    hb_link u_r_dm (.clk, .rst_n, .in_valid(dtx_v[NL + r]), .in_ready(dtx_r[NL + r]), .in_flit(dtx_f[NL + r]),
      .out_valid(mi_v[1][r]), .out_ready(mi_r[1][r]), .out_flit(mi_f[1][r]), .stalled(s2));
    hb_link u_r_md (.clk, .rst_n, .in_valid(mo_v[1][r]), .in_ready(mo_r[1][r]), .in_flit(mo_f[1][r]),
      .out_valid(drx_v[NL + r]), .out_ready(drx_r[NL + r]), .out_flit(drx_f[NL + r]), .stalled(s3));
    // far sides: nothing comes in, everything going out is taken
    assign mi_v[0][r] = 1'b0;  assign mi_f[0][r] = '0;  assign mo_r[0][r] = 1'b1;
    assign mi_v[1][NL + r] = 1'b0;  assign mi_f[1][NL + r] = '0;  assign mo_r[1][NL + r] = 1'b1;
  end

  always @(posedge clk) if (rst_n)
    for (int r = 0; r < NL; r++) if (mo_v[1][NL + r]) far_q.push_back(mo_f[1][NL + r]);

  int left_pkts, right_pkts;
  always @(posedge clk) if (rst_n) begin
    if (side_used[0]) left_pkts++;
    if (side_used[1]) right_pkts++;
  end

  function automatic data_t pat(int i); return {8{32'(32'hc0de_0000 + i)}}; endfunction

  task automatic run(copy_op_e op, alloc_pol_e pol, logic sd, int la, int ro, int bl, int br, int n,
                     output int took);
    int t0;
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.pol = pol; cmd.side = sd; cmd.laddr = addr_t'(la);
    cmd.roff = addr_t'(ro); cmd.base_left = addr_t'(bl); cmd.base_right = addr_t'(br); cmd.len = len_t'(n);
    cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    t0 = cyc;
    #0.1 cmd_valid = 0;
    do @(posedge clk); while (!done);
    took = cyc - t0;
  endtask

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_bw, t_loc, t;
    int bad;
    cmd_valid = 0; cmd = '0; left_pkts = 0; right_pkts = 0;
    for (int i = 0; i < 512; i++) lm.mem[i] = pat(i);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. BW_AWARE L2R, 4 pages
    run(OP_L2R, POL_BW_AWARE, 0, 0, 0, 0, 0, 512, t_bw);
    bad = 0;
    for (int p = 0; p < 4; p++)
      for (int w = 0; w < 128; w++) begin
        data_t got;
        got = (p % 2 == 0) ? g_m[0].g_d[1].u.mem[(p / 2) * 128 + w] : g_m[1].g_d[0].u.mem[(p / 2) * 128 + w];
        if (got != pat(p * 128 + w)) bad++;
      end
    check(bad == 0, $sformatf("BW_AWARE placement: %0d wrong words", bad));
    check(left_pkts == 32 && right_pkts == 32, $sformatf("BW_AWARE packets left %0d right %0d", left_pkts, right_pkts));

    // 2. BW_AWARE R2L back
    run(OP_R2L, POL_BW_AWARE, 0, 1024, 0, 0, 0, 512, t);
    bad = 0;
    for (int i = 0; i < 512; i++) if (lm.mem[1024 + i] != pat(i)) bad++;
    check(bad == 0, $sformatf("RemoteToLocal: %0d wrong words", bad));

    // 3. LOCAL L2R to the right node, base 1024
    left_pkts = 0; right_pkts = 0;
    run(OP_L2R, POL_LOCAL, 1, 0, 0, 0, 1024, 512, t_loc);
    bad = 0;
    for (int i = 0; i < 512; i++) if (g_m[1].g_d[0].u.mem[1024 + i] != pat(i)) bad++;
    check(bad == 0, $sformatf("LOCAL placement: %0d wrong words", bad));
    check(left_pkts == 0 && right_pkts == 64, $sformatf("LOCAL packets left %0d right %0d", left_pkts, right_pkts));
    $display("L2R 512 flits: BW_AWARE %0d cycles, LOCAL %0d cycles", t_bw, t_loc);
    check(t_loc >= 246 && t_loc <= 290, $sformatf("LOCAL time %0d, expected 246..290", t_loc));
    check(t_bw * 10 < t_loc * 6, "BW_AWARE not clearly faster than LOCAL");

    // 4. ring message to the right neighbour
    run(OP_MSG, POL_LOCAL, 1, 0, 'h800, 0, 0, 20, t);
    repeat (10) @(posedge clk);
    begin
      int nd, nh;
      nd = 0; nh = 0; bad = 0;
      foreach (far_q[k]) begin
        if (far_q[k].head) begin
          nh++;
          if (get_hdr(far_q[k]).kind != PK_MSG || get_hdr(far_q[k]).dst != 5'd2) bad++;
        end else nd++;
      end
      check(nh == 3 && nd == 20 && bad == 0, $sformatf("message: %0d headers %0d data %0d bad", nh, nd, bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
