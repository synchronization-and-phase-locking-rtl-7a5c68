// tb_acd_clkgen_top: end-to-end test of the AC-dipole timing core.
//
// The testbench plays the beam time structure, compressed: NSETS sets of
// NSPILL spills, each spill PULSES proton pulses 1,695 ns apart, spills
// separated by short gaps and sets by a long beam-off gap (all gap lengths
// chosen so that they are not multiples of the 3,390 ns carrier period, so
// the free-running clocks come back out of phase). Before each spill the
// upstream timing signal beam_sync is raised one nanosecond after a clock
// edge P; the design's fixed latency then puts the first carrier node at
// P + 270 ns (sync flops and edge detector 40 ns, first 4.42 MHz rise one
// cycle later, carrier transition 220 ns after that). The beam model takes
// that as the centre of the first pulse.
//
// Checks: at the centre of every beam pulse both lf_clk and hf_clk make a
// transition at exactly that time; every hf_clk half-period is 110 or
// 115 ns and every lf_clk half-period inside a spill is 1,695 ns; the
// phase_jump pulses and jump_count match the spills. Mechanisms counted,
// each of which must occur: phase jumps, jumps that actually moved the
// carrier phase, 115 ns half-periods on a falling clock edge, carrier
// transitions on a falling 4.42 MHz edge, accumulator restarts
// (supercycles), and 22- and 23-cycle 4.42 MHz periods.
`timescale 1ns/1ps
module tb_acd_clkgen_top;
  localparam int NSETS  = 2;
  localparam int NSPILL = 8;
  localparam int PULSES = 60;
  localparam real SPILL_GAP = 5000.0 + 123.0;   // ns, short gap
  localparam real OFF_GAP   = 40000.0 + 777.0;  // ns, beam-off gap

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
    for (int s = 0; s < NSETS; s++) begin
      for (int i = 0; i < NSPILL; i++) begin
        run_spill();
        #(SPILL_GAP + 37.0 * i);
      end
      #(OFF_GAP);
    end
    #10;
    check(n_jumps == NSETS * NSPILL, $sformatf("%0d phase jumps", n_jumps));
    check(jump_count == 16'(NSETS * NSPILL), $sformatf("jump_count=%0d", jump_count));
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
    #20ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
