// tb_dma_unit: one memory-node group's DMA unit on its memory controller
// (latency 100) and a DIMM model.  On each of the three links the test
// writes 4 packets of 8 flits, checks one PK_WR_ACK per packet, then sends 8
// read requests back to back and checks every PK_RD_RSP header and data
// word.  It also checks that the first read data leaves the unit about 100
// cycles after its request, and that reads overlap: 8 reads of 8 flits
// finish well within 8 x 100 cycles.
`timescale 1ns/1ps
module tb_dma_unit;
  import mcdla_pkg::*;
  localparam int NL = 3;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic  rxv [NL], rxr [NL], txv [NL], txr [NL];
  flit_t rxf [NL], txf [NL];
  logic  qv [NL], qr [NL], qw [NL], sv [NL];
  addr_t qa [NL];
  data_t qd [NL], sd [NL];
  logic  dq [NL], dw [NL];
  addr_t da [NL];
  data_t dd [NL], dr [NL];

  dma_unit #(.NODE_ID(17)) dut (.clk, .rst_n, .rx_valid(rxv), .rx_ready(rxr), .rx_flit(rxf),
    .tx_valid(txv), .tx_ready(txr), .tx_flit(txf),
    .mreq_valid(qv), .mreq_ready(qr), .mreq_we(qw), .mreq_addr(qa), .mreq_wdata(qd),
    .mrsp_valid(sv), .mrsp_data(sd));
  mem_ctrl mc (.clk, .rst_n, .req_valid(qv), .req_ready(qr), .req_we(qw), .req_addr(qa),
    .req_wdata(qd), .rsp_valid(sv), .rsp_data(sd),
    .dimm_req(dq), .dimm_we(dw), .dimm_addr(da), .dimm_wdata(dd), .dimm_rdata(dr));
  dimm_model #(.NPORT(NL)) dimm (.clk, .req(dq), .we(dw), .addr(da), .wdata(dd), .rdata(dr));

  function automatic data_t pat(int l, int a);
    return {8{32'(l * 32'h1000_0000 + a)}};
  endfunction

  // expected response stream per link
  flit_t exp_q [NL][$];
  int    nrx [NL];
  int    first_req_t [NL], first_data_t [NL], last_t [NL];

  for (genvar l = 0; l < NL; l++) begin : g_mon
    always @(posedge clk) if (rst_n && txv[l] && txr[l]) begin
      nrx[l]++;
      if (exp_q[l].size() == 0) check(0, $sformatf("link %0d unexpected flit", l));
      else begin
        flit_t e;
        e = exp_q[l].pop_front();
        check(txf[l] == e, $sformatf("link %0d flit %0d mismatch", l, nrx[l]));
      end
      if (!txf[l].head && first_data_t[l] < 0) first_data_t[l] = cyc;
      last_t[l] = cyc;
    end
  end

  task automatic send(int l, flit_t f);
    @(negedge clk);
    rxv[l] = 1; rxf[l] = f;
    do @(posedge clk); while (!rxr[l]);
    #0.1 rxv[l] = 0;
  endtask

  task automatic run_link(int l);
    pkt_hdr_t h;
    flit_t f;
    // writes
    for (int p = 0; p < 4; p++) begin
      h = '0; h.kind = PK_WR_REQ; h.src = 5'(l); h.dst = 5'd17; h.tag = 8'(p);
      h.len = 8; h.addr = addr_t'(l * 256 + p * 8);
      f = make_hdr(h); send(l, f);
      for (int i = 0; i < 8; i++) begin
        f.head = 0; f.tail = (i == 7); f.data = pat(l, l * 256 + p * 8 + i);
        send(l, f);
      end
      h.kind = PK_WR_ACK; h.src = 5'd17; h.dst = 5'(l);
      exp_q[l].push_back(make_hdr(h));
    end
    wait (exp_q[l].size() == 0);
    // reads, back to back
    first_data_t[l] = -1;
    for (int p = 0; p < 8; p++) begin
      h = '0; h.kind = PK_RD_REQ; h.src = 5'(l); h.dst = 5'd17; h.tag = 8'(16 + p);
      h.len = 4; h.addr = addr_t'(l * 256 + p * 4);
      h.kind = PK_RD_RSP; h.src = 5'd17; h.dst = 5'(l);
      f = make_hdr(h); f.tail = 0;
      exp_q[l].push_back(f);
      for (int i = 0; i < 4; i++) begin
        flit_t d;
        d.head = 0; d.tail = (i == 3); d.data = pat(l, l * 256 + p * 4 + i);
        exp_q[l].push_back(d);
      end
      h.kind = PK_RD_REQ; h.src = 5'(l); h.dst = 5'd17;
      if (p == 0) first_req_t[l] = cyc;
      send(l, make_hdr(h));
    end
    wait (exp_q[l].size() == 0);
    check(first_data_t[l] - first_req_t[l] >= 100 && first_data_t[l] - first_req_t[l] <= 106,
          $sformatf("link %0d first read data after %0d cycles, expected 100..106",
                    l, first_data_t[l] - first_req_t[l]));
    check(last_t[l] - first_req_t[l] < 160,
          $sformatf("link %0d 8 overlapped reads took %0d cycles", l, last_t[l] - first_req_t[l]));
  endtask

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) begin rxv[l] = 0; rxf[l] = '0; txr[l] = 1; nrx[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      run_link(0);
      run_link(1);
      run_link(2);
    join
    repeat (5) @(posedge clk);
    for (int l = 0; l < NL; l++) check(nrx[l] == 4 + 8 * 5, $sformatf("link %0d flit count %0d", l, nrx[l]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
