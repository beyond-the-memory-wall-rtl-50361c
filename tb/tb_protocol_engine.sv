// tb_protocol_engine: random packets on all six links and all six DMA
// response sources, with random back-pressure everywhere.  Checks that
// read/write requests reach the DMA channel of their own link, that ring
// messages leave on the same ring's link of the other side, that responses
// leave on their own link, that no packet is cut or interleaved with
// another, and that the per-output arbitration conflict actually happens.
`timescale 1ns/1ps
module tb_protocol_engine;
  import mcdla_pkg::*;
  localparam int NL = 3, NP = 6, NPK = 20;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic  lin_valid [NP], lin_ready [NP], lout_valid [NP], lout_ready [NP];
  flit_t lin_flit [NP], lout_flit [NP];
  logic  dreq_valid [NP], dreq_ready [NP], drsp_valid [NP], drsp_ready [NP];
  flit_t dreq_flit [NP], drsp_flit [NP];
  logic  fwd_pkt [NP], arb_conflict [NP];
  protocol_engine dut (.*);

  function automatic int other(int i); return i < NL ? i + NL : i - NL; endfunction

  // marker in the top byte lanes: source id, packet number, flit index
  function automatic flit_t mk(int srcid, int pk, int idx, bit head, bit tail, pkt_kind_e k);
    flit_t f;
    pkt_hdr_t h;
    h = '0; h.kind = k; h.len = 4;
    f = head ? make_hdr(h) : '0;
    f.head = head; f.tail = tail;
    f.data[255:232] = {8'(srcid), 8'(pk), 8'(idx)};
    return f;
  endfunction

  int n_dreq_exp [NP], n_lout_exp [NP], n_dreq [NP], n_lout [NP], nfwd, nconf;
  int cur_src_d [NP], cur_pk_d [NP], nxt_idx_d [NP];
  int cur_src_o [NP], cur_pk_o [NP], nxt_idx_o [NP];

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NP; i++) begin
      if (fwd_pkt[i]) nfwd++;
      if (arb_conflict[i]) nconf++;
      if (dreq_valid[i] && dreq_ready[i]) begin
        int s, p, x;
        {s, p, x} = {24'd0, dreq_flit[i].data[255:248], 24'd0, dreq_flit[i].data[247:240], 24'd0, dreq_flit[i].data[239:232]};
        if (dreq_flit[i].head) begin
          check(s == i, $sformatf("dreq %0d got packet from source %0d", i, s));
          check(get_hdr(dreq_flit[i]).kind inside {PK_RD_REQ, PK_WR_REQ}, "dreq kind");
          cur_src_d[i] = s; cur_pk_d[i] = p; nxt_idx_d[i] = 1;
        end else begin
          check(s == cur_src_d[i] && p == cur_pk_d[i] && x == nxt_idx_d[i],
                $sformatf("dreq %0d packet interleaved", i));
          nxt_idx_d[i]++;
        end
        if (dreq_flit[i].tail) n_dreq[i]++;
      end
      if (lout_valid[i] && lout_ready[i]) begin
        int s, p, x;
        {s, p, x} = {24'd0, lout_flit[i].data[255:248], 24'd0, lout_flit[i].data[247:240], 24'd0, lout_flit[i].data[239:232]};
        if (lout_flit[i].head) begin
          check(s == 100 + i || s == other(i), $sformatf("lout %0d got packet from source %0d", i, s));
          if (s == other(i)) check(get_hdr(lout_flit[i]).kind == PK_MSG, "forwarded kind");
          cur_src_o[i] = s; cur_pk_o[i] = p; nxt_idx_o[i] = 1;
        end else begin
          check(s == cur_src_o[i] && p == cur_pk_o[i] && x == nxt_idx_o[i],
                $sformatf("lout %0d packet interleaved", i));
          nxt_idx_o[i]++;
        end
        if (lout_flit[i].tail) n_lout[i]++;
      end
    end
  end

  // random ready
  always @(negedge clk) for (int i = 0; i < NP; i++) begin
    dreq_ready[i] = ($urandom % 4) != 0;
    lout_ready[i] = ($urandom % 4) != 0;
  end

  task automatic put_in(int i, flit_t f);
    @(negedge clk); lin_valid[i] = 1; lin_flit[i] = f;
    do @(posedge clk); while (!lin_ready[i]);
    #0.1 lin_valid[i] = 0;
  endtask
  task automatic put_rsp(int i, flit_t f);
    @(negedge clk); drsp_valid[i] = 1; drsp_flit[i] = f;
    do @(posedge clk); while (!drsp_ready[i]);
    #0.1 drsp_valid[i] = 0;
  endtask

  task automatic drive_in(int i);
    for (int p = 0; p < NPK; p++) begin
      int k, len;
      k = $urandom % 3; len = 1 + $urandom % 4;
      if (k == 0) begin                       // read request: header only
        put_in(i, mk(i, p, 0, 1, 1, PK_RD_REQ)); n_dreq_exp[i]++;
      end else begin
        pkt_kind_e kk;
        kk = (k == 1) ? PK_WR_REQ : PK_MSG;
        put_in(i, mk(i, p, 0, 1, 0, kk));
        for (int x = 1; x <= len; x++) put_in(i, mk(i, p, x, 0, x == len, kk));
        if (k == 1) n_dreq_exp[i]++; else n_lout_exp[other(i)]++;
      end
    end
  endtask
  task automatic drive_rsp(int i);
    for (int p = 0; p < NPK; p++) begin
      int len;
      len = $urandom % 4;
      put_rsp(i, mk(100 + i, p, 0, 1, len == 0, PK_RD_RSP));
      for (int x = 1; x <= len; x++) put_rsp(i, mk(100 + i, p, x, 0, x == len, PK_RD_RSP));
      n_lout_exp[i]++;
    end
  endtask

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nfwd = 0; nconf = 0;
    for (int i = 0; i < NP; i++) begin
      lin_valid[i] = 0; lin_flit[i] = '0; drsp_valid[i] = 0; drsp_flit[i] = '0;
      n_dreq_exp[i] = 0; n_lout_exp[i] = 0; n_dreq[i] = 0; n_lout[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      drive_in(0); drive_in(1); drive_in(2); drive_in(3); drive_in(4); drive_in(5);
      drive_rsp(0); drive_rsp(1); drive_rsp(2); drive_rsp(3); drive_rsp(4); drive_rsp(5);
    join
    repeat (50) @(posedge clk);
    begin
      int nmsg;
      nmsg = 0;
      for (int i = 0; i < NP; i++) begin
        check(n_dreq[i] == n_dreq_exp[i], $sformatf("dreq %0d packets %0d/%0d", i, n_dreq[i], n_dreq_exp[i]));
        check(n_lout[i] == n_lout_exp[i], $sformatf("lout %0d packets %0d/%0d", i, n_lout[i], n_lout_exp[i]));
        nmsg += n_lout_exp[i] - NPK;
      end
      check(nfwd == nmsg, $sformatf("forward events %0d, messages %0d", nfwd, nmsg));
    end
    check(nconf > 0, "no arbitration conflict happened");
    $display("conflict cycles %0d", nconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
