// tb_mem_ctrl: checks the memory controller of one group.
//  * every read returns the DIMM word exactly LAT = 100 cycles after it is
//    granted, in order per port;
//  * writes land and read back;
//  * at the default 128 bytes/cycle all three ports are granted every cycle;
//    a second instance limited to 32 bytes/cycle grants one flit per cycle.
`timescale 1ns/1ps
module tb_mem_ctrl;
  import mcdla_pkg::*;
  localparam int NP = 3;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- instance A: defaults ----
  logic  rv [NP], rr [NP], rw [NP], sv [NP];
  addr_t ra [NP];
  data_t rd [NP], sd [NP];
  logic  dq [NP], dw [NP];
  addr_t da [NP];
  data_t dd [NP], dr [NP];
  mem_ctrl dut (.clk, .rst_n, .req_valid(rv), .req_ready(rr), .req_we(rw), .req_addr(ra),
                .req_wdata(rd), .rsp_valid(sv), .rsp_data(sd),
                .dimm_req(dq), .dimm_we(dw), .dimm_addr(da), .dimm_wdata(dd), .dimm_rdata(dr));
  dimm_model #(.NPORT(NP)) dimm (.clk, .req(dq), .we(dw), .addr(da), .wdata(dd), .rdata(dr));

  // ---- instance B: 32 bytes per cycle ----
  logic  bv [NP], br [NP], bw [NP], bs [NP];
  addr_t ba [NP];
  data_t bd [NP], bsd [NP];
  logic  bq [NP], bqw [NP];
  addr_t bqa [NP];
  data_t bqd [NP], bqr [NP];
  mem_ctrl #(.BYTES_PER_CYCLE(32)) dut_b (.clk, .rst_n, .req_valid(bv), .req_ready(br), .req_we(bw),
                .req_addr(ba), .req_wdata(bd), .rsp_valid(bs), .rsp_data(bsd),
                .dimm_req(bq), .dimm_we(bqw), .dimm_addr(bqa), .dimm_wdata(bqd), .dimm_rdata(bqr));
  dimm_model #(.NPORT(NP)) dimm_b (.clk, .req(bq), .we(bqw), .addr(bqa), .wdata(bqd), .rdata(bqr));

  int   due_t [NP][$];
  data_t due_d [NP][$];
  int   grants_a, grants_b, nrsp;
  logic counting;

  function automatic data_t pat(addr_t a);
    return {8{a[31:0] ^ 32'h5a5a0000}};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      if (rv[p] && rr[p]) begin
        if (counting) grants_a++;
        if (!rw[p]) begin
          due_t[p].push_back(cyc + 100);
          due_d[p].push_back(pat(ra[p]));
        end
      end
      if (bv[p] && br[p] && counting) grants_b++;
      if (sv[p]) begin
        nrsp++;
        if (due_t[p].size() == 0) check(0, "response without request");
        else begin
          int t; data_t d;
          t = due_t[p].pop_front(); d = due_d[p].pop_front();
          check(t == cyc, $sformatf("port %0d latency: due %0d got %0d", p, t, cyc));
          check(sd[p] == d, $sformatf("port %0d data", p));
        end
      end
    end
  end

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    grants_a = 0; grants_b = 0; nrsp = 0; counting = 0;
    for (int p = 0; p < NP; p++) begin
      rv[p] = 0; rw[p] = 0; ra[p] = '0; rd[p] = '0;
      bv[p] = 0; bw[p] = 0; ba[p] = '0; bd[p] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: write 3 x 40 words
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        rv[p] = 1; rw[p] = 1; ra[p] = addr_t'(p * 64 + i); rd[p] = pat(addr_t'(p * 64 + i));
      end
      @(posedge clk); #0.1;
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) rv[p] = 0;
    // phase 2: read them back, all ports every cycle
    counting = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        rv[p] = 1; rw[p] = 0; ra[p] = addr_t'(p * 64 + i);
        bv[p] = 1; bw[p] = 0; ba[p] = addr_t'(i);
      end
    end
    @(negedge clk);
    counting = 0;
    for (int p = 0; p < NP; p++) begin rv[p] = 0; bv[p] = 0; end
    repeat (120) @(posedge clk);
    check(nrsp == 120, $sformatf("120 read responses, got %0d", nrsp));
    check(grants_a == 120, $sformatf("128 B/cycle: 3 grants per cycle over 40 cycles, got %0d", grants_a));
    // one grant per cycle plus the burst the full initial credit (3*32+32 bytes) allows
    check(grants_b >= 42 && grants_b <= 44, $sformatf("32 B/cycle: 40 cycles + initial burst, got %0d", grants_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
