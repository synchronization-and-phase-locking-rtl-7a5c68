// tb_lf_clkgen: checks the 295 kHz cascaded generator.
//
// The 4.42 MHz generator (hf_clkgen) supplies the edge announcements, as in
// the full design. Expected behaviour, from the stated numbers: every
// lf_clk half-period is 1,695 ns; each lf_clk transition happens at the
// same instant as an hf_clk transition, 15 hf_clk transitions apart;
// lf_clk transitions alternate between hf_clk rising and falling edges.
// After reset lf_clk is low and first changes on the third hf_clk edge
// (220 ns after the first rise). After a restart pulse lf_clk goes high at
// once and first falls 220 ns after the rise that opens the new
// supercycle, on an hf_clk rising edge.
`timescale 1ns/1ps
module tb_lf_clkgen;
  import acd_pkg::*;

  logic clk = 1'b0;
  logic rst, restart;
  logic hf_clk, lf_clk;
  edge_sel_e hf_ev_sel, lf_ev_sel;
  logic hf_ev_level, lf_ev_level, super_start;
  logic [6:0]  tick;
  logic [11:0] phase;

  int checks = 0, failures = 0;

  hf_clkgen u_hf (.clk, .rst, .restart, .hf_clk, .ev_sel(hf_ev_sel), .ev_level(hf_ev_level),
                  .super_start, .tick, .phase);
  lf_clkgen dut (.clk, .rst, .restart, .hf_ev_sel, .lf_clk, .ev_sel(lf_ev_sel),
                 .ev_level(lf_ev_level));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $realtime, msg);
    end
  endtask

  realtime hf_t = -1.0;       // time of the latest hf_clk transition
  logic    hf_lvl;            // level hf_clk took then
  int      hf_count = 0;      // hf_clk transitions since the last lf_clk one
  always @(hf_clk) if (!rst) begin
    hf_t = $realtime; hf_lvl = hf_clk; hf_count++;
  end

  realtime lf_t = -1.0;
  realtime expect_at = -1.0;  // expected time of the next untimed transition
  logic    expect_lvl;
  int      n_lf = 0, n_on_rise = 0, n_on_fall = 0, n_timed = 0;
  logic    prev_on_rise;
  bit      have_prev = 0;

  always @(lf_clk) if (!rst) begin
    realtime now;
    now = $realtime;
    #0.1;  // let an hf_clk change at the same instant be recorded
    n_lf++;
    if (expect_at >= 0.0) begin
      check(now == expect_at && lf_clk == expect_lvl,
            $sformatf("lf_clk=%0b at %0t, expected %0b at %0t", lf_clk, now, expect_lvl, expect_at));
      expect_at = -1.0;
      have_prev = 0;
    end else begin
      check(hf_t == now, $sformatf("no hf_clk edge with lf_clk edge at %0t", now));
      if (lf_t >= 0.0) begin
        check(now - lf_t == 1695.0, $sformatf("half-period %0t", now - lf_t));
        check(hf_count == 15, $sformatf("%0d hf edges in a half-period", hf_count));
        n_timed++;
      end
      if (have_prev)
        check(hf_lvl != prev_on_rise, "two lf transitions on the same hf edge kind");
      prev_on_rise = hf_lvl;
      have_prev = 1;
      if (hf_lvl) n_on_rise++; else n_on_fall++;
      lf_t = now;
    end
    hf_count = 0;
  end

  initial begin
    rst = 1'b1; restart = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // hf rises at the next edge; lf rises 22 cycles later
    expect_at = $realtime - 1.0 + 10.0 + 220.0;
    expect_lvl = 1'b1;
    #(8 * 3390);
    // restart while lf_clk is low
    @(negedge lf_clk);
    #600;
    @(posedge clk);
    #1 restart = 1'b1;
    expect_at = $realtime - 1.0 + 10.0;   // set high at the sampling edge
    expect_lvl = 1'b1;
    @(posedge clk);
    #1 restart = 1'b0;
    check(lf_clk == 1'b1 && expect_at < 0.0, "lf_clk not set high by restart");
    lf_t = -1.0;
    #0.5;
    expect_at = $realtime - 1.5 + 10.0 + 220.0;
    expect_lvl = 1'b0;
    #(8 * 3390);
    // restart while lf_clk is high: no transition, first fall as above
    @(posedge lf_clk);
    #300;
    @(posedge clk);
    #1 restart = 1'b1;
    @(posedge clk);
    #1 restart = 1'b0;
    #0.5;
    lf_t = -1.0;
    expect_at = $realtime - 1.5 + 10.0 + 220.0;
    expect_lvl = 1'b0;
    #(6 * 3390);
    check(n_timed > 30, $sformatf("only %0d timed half-periods", n_timed));
    check(n_on_rise > 10 && n_on_fall > 10,
          $sformatf("on hf rising=%0d falling=%0d", n_on_rise, n_on_fall));
    $display("lf transitions=%0d timed=%0d on hf rise=%0d on hf fall=%0d",
             n_lf, n_timed, n_on_rise, n_on_fall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
