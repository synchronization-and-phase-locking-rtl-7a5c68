// tb_beam_macrocycle: one full beam macro-cycle at real time scale.
//
// The beam reaching the AC dipole arrives in eight spills within 380 ms,
// separated by 5 ms gaps, followed by 1,020 ms with no beam (1,400 ms in
// all); then the next eight spills begin. Spill length is taken as
// (380 ms - 7 x 5 ms) / 8 = 43.125 ms, i.e. 25,442 pulses 1,695 ns apart.
// This testbench runs the whole 1.4 s cycle and the first spill of the
// next one, nine phase jumps in all, and applies at every one of the
// 229,000 beam pulses the same checks as the end-to-end test
// (tb_acd_clkgen_top): at each pulse centre both drive clocks make a
// transition; every 4.42 MHz half-period is 110 or 115 ns and every
// 295 kHz half-period within a spill is 1,695 ns. The beam model and the
// 270 ns latency from beam_sync to the first carrier node are as there.
// About 1.45 s of simulated time: expect a minute or two of run time.
`timescale 1ns/1ps
module tb_beam_macrocycle;
  localparam int NSPILL = 8;                   // spills per macro-cycle
  localparam int NRUN   = NSPILL + 1;          // plus the first of the next
  localparam int PULSES = 25442;               // 43.125 ms / 1,695 ns
  localparam real SPILL_GAP = 5.0e6;           // ns
  localparam real OFF_GAP   = 1020.0e6;        // ns

  logic clk = 1'b0;
  logic rst, beam_sync;
  logic hf_clk, lf_clk, super_start, phase_jump;
  logic [15:0] jump_count;
  logic [6:0]  hf_tick;
  logic [11:0] hf_phase;

  acd_clkgen_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $realtime, msg);
    end
  endtask

  // mechanism counters
  int n_jumps = 0, n_moved = 0, n_late = 0, n_lf_on_hf_fall = 0;
  int n_super = 0, n_p22 = 0, n_p23 = 0, n_pulses = 0;

  realtime hf_t = -1.0, hf_rise_t = -1.0, lf_t = -1.0;
  logic    hf_lvl;
  bit      in_spill = 0;

  always @(hf_clk) if (!rst) begin
    realtime now;
    now = $realtime;
    if (in_spill && hf_t >= 0.0)
      check(now - hf_t == 110.0 || now - hf_t == 115.0,
            $sformatf("hf half-period %0t", now - hf_t));
    if (now - 10.0 * $floor(now / 10.0) == 0.0) n_late++;
    if (hf_clk) begin
      if (in_spill && hf_rise_t >= 0.0) begin
        if (now - hf_rise_t == 220.0) n_p22++;
        else if (now - hf_rise_t == 230.0) n_p23++;
        else check(0, $sformatf("hf period %0t", now - hf_rise_t));
      end
      hf_rise_t = now;
    end
    hf_t = now; hf_lvl = hf_clk;
  end

  always @(lf_clk) if (!rst) begin
    realtime now;
    now = $realtime;
    #0.1;
    if (in_spill && lf_t >= 0.0)
      check(now - lf_t == 1695.0, $sformatf("lf half-period %0t", now - lf_t));
    if (hf_t == now && !hf_lvl) n_lf_on_hf_fall++;
    lf_t = now;
  end

  always @(posedge clk) begin
    if (!rst && super_start) n_super++;
    if (!rst && phase_jump) n_jumps++;
  end

  task automatic run_spill();
    realtime p, c, lf_before;
    @(posedge clk);
    p = $realtime;
    lf_before = lf_t;
    #1 beam_sync = 1'b1;
    #200 beam_sync = 1'b0;
    c = p + 270.0;
    // did the jump move the carrier phase away from where free-running
    // would have put it?
    if (lf_before >= 0.0) begin
      real r;
      r = (c - lf_before) - 1695.0 * $floor((c - lf_before) / 1695.0);
      if (r != 0.0) n_moved++;
    end
    // the new supercycle's first rise is at c - 220 ns; start timing
    // half-periods after it
    #(c - $realtime - 50.0);
    in_spill = 1;
    hf_t = -1.0; hf_rise_t = -1.0; lf_t = -1.0;
    for (int k = 0; k < PULSES; k++) begin
      realtime ck;
      ck = c + 1695.0 * k;
      #(ck + 0.5 - $realtime);
      n_pulses++;
      check(lf_t == ck, $sformatf("pulse %0d: last lf edge %0t, centre %0t", k, lf_t, ck));
      check(hf_t == ck, $sformatf("pulse %0d: last hf edge %0t, centre %0t", k, hf_t, ck));
    end
    in_spill = 0;
  endtask

  initial begin
    rst = 1'b1; beam_sync = 1'b0;
    repeat (5) @(posedge clk);
    #1 rst = 1'b0;
    #3000;
    for (int i = 0; i < NRUN; i++) begin
      run_spill();
      $display("spill %0d: %0d pulses checked, t=%0.3f ms, failures so far %0d",
               i, PULSES, $realtime / 1.0e6, failures);
      if (i == NSPILL - 1) #(OFF_GAP);
      else if (i < NRUN - 1) #(SPILL_GAP);
    end
    #10;
    check(n_jumps == NRUN, $sformatf("%0d phase jumps", n_jumps));
    check(jump_count == 16'(NRUN), $sformatf("jump_count=%0d", jump_count));
    check(n_jumps > 0, "no phase jump");
    check(n_moved > 0, "no jump moved the phase");
    check(n_late > 0, "no 115 ns half-period on a falling clock edge");
    check(n_lf_on_hf_fall > 0, "no carrier transition on a falling 4.42 MHz edge");
    check(n_super > 0, "no supercycle restart");
    check(n_p22 > 0 && n_p23 > 0, "22- and 23-cycle periods");
    $display("pulses=%0d jumps=%0d moved=%0d late_edges=%0d lf_on_hf_fall=%0d supercycles=%0d p22=%0d p23=%0d",
             n_pulses, n_jumps, n_moved, n_late, n_lf_on_hf_fall, n_super, n_p22, n_p23);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
