// tb_hf_clkgen: checks the 4.42 MHz phase-accumulator generator.
//
// Expected behaviour, worked out from the stated numbers and not from the
// generator: a supercycle of 113 input cycles holds five output periods of
// 22,23,22,23,23 cycles; a 22-cycle period is split 110/110 ns and a
// 23-cycle period 115/115 ns. Starting from the rise that opens a
// supercycle, the half-periods (ns) are therefore
//   110 110 115 115 110 110 115 115 115 115
// The testbench times every hf_clk transition and compares each interval
// with that list, checks that 15 consecutive periods hold nine 230 ns and
// six 220 ns periods, checks that the accumulator equals (181*tick) mod
// 4096 on every cycle and that the lag behind the ideal phase
// (4096*tick/22.6) stays under 28 counts, and checks that the first rise
// comes one cycle after reset and one cycle after a restart (phase jump),
// with the pattern restarting from its first entry.
`timescale 1ns/1ps
module tb_hf_clkgen;
  import acd_pkg::*;

  logic clk = 1'b0;
  logic rst, restart;
  logic hf_clk;
  edge_sel_e ev_sel;
  logic ev_level, super_start;
  logic [6:0]  tick;
  logic [11:0] phase;

  int checks = 0, failures = 0;
  int halves[10] = '{110, 110, 115, 115, 110, 110, 115, 115, 115, 115};

  hf_clkgen dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $realtime, msg);
    end
  endtask

  // ---- edge timing ------------------------------------------------------
  realtime last_t = -1.0;
  realtime expect_rise_at = -1.0;   // set when a supercycle start is forced
  int      idx = 0;                 // position in the half-period list
  int      first_idx = 0;           // idx after an edge that is not timed
  int      n_edges = 0, n_late = 0;
  realtime per_start = -1.0;
  int      n230 = 0, n220 = 0, n_per = 0;

  always @(hf_clk) begin
    realtime now;
    now = $realtime;
    if (rst) begin
      last_t = -1.0;
    end else begin
    n_edges++;
    // a transition between clock edges is a falling-edge (115 ns) one
    if (now - 10.0 * $floor(now / 10.0) != 5.0) n_late++;
    if (expect_rise_at >= 0.0) begin
      check(hf_clk == 1'b1 && now == expect_rise_at,
            $sformatf("first rise at %0t, expected %0t", now, expect_rise_at));
      expect_rise_at = -1.0;
      idx = 0;
      per_start = now; n230 = 0; n220 = 0; n_per = 0;
    end else if (last_t < 0.0) begin
      idx = first_idx;
      per_start = -1.0; n230 = 0; n220 = 0; n_per = 0;
    end else begin
      check(now - last_t == real'(halves[idx]),
            $sformatf("half-period %0d: %0t ns, expected %0d", idx, now - last_t, halves[idx]));
      check(hf_clk == ((idx % 2) == 1),
            $sformatf("level %0b after half-period %0d", hf_clk, idx));
      idx = (idx + 1) % 10;
      if (hf_clk && per_start < 0.0) begin
        per_start = now;
      end else if (hf_clk) begin
        if (now - per_start == 230.0) n230++;
        else if (now - per_start == 220.0) n220++;
        n_per++;
        per_start = now;
        if (n_per == 15) begin
          check(n230 == 9 && n220 == 6,
                $sformatf("15 periods: %0d of 230 ns, %0d of 220 ns", n230, n220));
          n_per = 0; n230 = 0; n220 = 0;
        end
      end
    end
    last_t = now;
    end
  end

  // ---- accumulator ------------------------------------------------------
  int ticks_seen = 0;
  always @(posedge clk) begin
    if (!rst) begin
      real ideal;
      ticks_seen++;
      check(phase == 12'((181 * int'(tick)) % 4096),
            $sformatf("phase %0d at tick %0d", phase, tick));
      ideal = 4096.0 * 10.0 * real'(tick) / 226.0;
      check(ideal - real'(181 * int'(tick)) < 28.0, "accumulated error >= 28");
      check(super_start == (tick == 0), "super_start");
    end
  end

  initial begin
    rst = 1'b1; restart = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // first cycle after reset is tick 0; its rise lands at the next edge
    expect_rise_at = $realtime - 1.0 + 10.0;
    // run 6 supercycles
    repeat (6 * 113) @(posedge clk);
    // phase jump while the output is low, in the middle of a period
    @(negedge hf_clk);
    repeat (4) @(posedge clk);
    #1 restart = 1'b1;
    @(posedge clk);
    #1 restart = 1'b0;
    expect_rise_at = $realtime - 1.0 + 10.0;
    repeat (6 * 113) @(posedge clk);
    // a second jump right after a rise, so the pending fall is pre-empted
    @(posedge hf_clk);
    @(posedge clk);
    #1 restart = 1'b1;
    @(posedge clk);
    #1 restart = 1'b0;
    // the output is already high, so the first edge seen is the fall
    // closing half-period 0 of the new supercycle: it is not timed
    first_idx = 1;
    last_t = -1.0;
    repeat (25) @(posedge clk);
    #1;
    check(tick == 7'd25 && phase == 12'((181 * 25) % 4096), "tick/phase after second restart");
    repeat (4 * 113) @(posedge clk);
    check(n_edges > 120, $sformatf("only %0d transitions", n_edges));
    check(n_late > 40, $sformatf("only %0d falling-edge transitions", n_late));
    $display("transitions=%0d on falling clock edges=%0d ticks=%0d", n_edges, n_late, ticks_seen);
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
