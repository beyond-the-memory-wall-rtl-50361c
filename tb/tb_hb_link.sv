// tb_hb_link: checks one link direction.  (1) 1000 back-to-back flits with
// an always-ready receiver must arrive in order and take 999*32/25 cycles
// from first to last (25 GB/sec at 1 GHz with 32-byte flits).  (2) With a
// randomly stalling receiver no flit is lost, duplicated or reordered.
`timescale 1ns/1ps
module tb_hb_link;
  import mcdla_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, stalled;
  flit_t in_flit, out_flit;
  hb_link dut (.*);

  int sent, rcvd, first_t, last_t, cyc, nstall;
  logic rand_rdy;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (stalled) nstall++;
    if (out_valid && out_ready) begin
      check(out_flit.data == data_t'(rcvd), $sformatf("flit %0d data %0h", rcvd, out_flit.data[31:0]));
      if (rcvd == 0) first_t = cyc;
      last_t = cyc;
      rcvd++;
    end
    if (in_valid && in_ready) sent <= sent + 1;
  end

  assign in_flit = '{head: 1'b0, tail: 1'b0, data: data_t'(sent)};
  assign out_ready = rand_rdy;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; sent = 0; rcvd = 0; nstall = 0; in_valid = 0; rand_rdy = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    wait (sent == 1000);
    @(negedge clk); in_valid = 0;
    wait (rcvd == 1000);
    // 999 intervals of 32/25 cycles = 1278.72
    check(last_t - first_t >= 1278 && last_t - first_t <= 1279,
          $sformatf("1000 flits spanned %0d cycles, expected 1278..1279", last_t - first_t));
    check(nstall > 0, "link credit stall never seen");
    // random back-pressure
    sent = 0; rcvd = 0;
    fork
      begin
        @(negedge clk); in_valid = 1;
        wait (sent == 500);
        @(negedge clk); in_valid = 0;
      end
      begin
        while (rcvd < 500) begin @(negedge clk); rand_rdy = ($urandom % 3) != 0; end
      end
    join
    rand_rdy = 1;
    check(rcvd == 500, "all flits received under back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
