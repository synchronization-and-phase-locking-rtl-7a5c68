// hf_clkgen: 4.42 MHz clock from a 100 MHz clock by a digital phase
// accumulator (the design's "custom PLL").
//
// The ideal output period is 226 ns = 22.6 input cycles, with a transition
// every 113 ns. A 12-bit accumulator advances by PHASE_INC = 181 per input
// cycle (4096 / 22.6 = 181.239, truncated); each time the next step would
// carry out of the accumulator, a new output period starts and the output
// rises. The carry is looked at one step ahead (phase >= 2^ACC_W - INC),
// so the rising edge lands on the input cycle at or before the ideal time.
// Every SUPER_CYCLES = 113 input cycles (five output periods, 1,130 ns)
// the accumulator restarts from zero, which throws away the 0.239-per-cycle
// truncation error (27 counts at most, under the 181-count step, so no
// transition moves). The periods of a supercycle are then 22, 23, 22, 23
// and 23 input cycles, 226 ns on average.
//
// Each period has one falling transition. It is placed after 110 ns for a
// 22-cycle period and after 115 ns, on a falling clock edge, for a
// 23-cycle period, so both half-periods of every period are equal. The
// length of the running period is read from the accumulator 11 cycles in:
// the period ends after 22 cycles exactly when the carry look-ahead will
// fire 11 steps later, i.e. when phase >= 2^ACC_W - (HALF_CYCLES+1)*INC
// (1924 with the default numbers). The accumulator, its step, the 113-cycle
// restart and the 110/115 ns choice are the paper's; this way of deciding
// between 110 and 115 ns, and the period-position counter it uses, are this
// design's own.
//
// Interface and timing: all state is clocked by the rising edge of clk.
// 'tick' is the input cycle within the supercycle and 'phase' the
// accumulator. 'ev_sel'/'ev_level' announce, combinationally, the output
// transition that takes effect at the coming rising edge (EDGE_POS) or at
// the falling edge half a cycle after it (EDGE_NEG); hf_clk shows it one
// register later (dual_edge_reg). Cascaded generators use ev_sel/ev_level
// to move in step with hf_clk. 'restart' (one cycle, synchronous) makes the
// next cycle tick 0 of a new supercycle, which starts with a rising edge:
// this is the phase jump. rst does the same and clears the output.
module hf_clkgen
  import acd_pkg::*;
#(
  parameter int unsigned W    = ACC_W,
  parameter int unsigned INC  = PHASE_INC,
  parameter int unsigned SUPER = SUPER_CYCLES,
  parameter int unsigned HALF = HF_HALF_CYCLES
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        restart,
  output logic                        hf_clk,
  output edge_sel_e                   ev_sel,
  output logic                        ev_level,
  output logic                        super_start,
  output logic [$clog2(SUPER)-1:0]    tick,
  output logic [W-1:0]                phase
);

  localparam int unsigned TW = $clog2(SUPER);
  localparam int unsigned KW = $clog2(2*HALF + 3);
  // Carry look-ahead: the next step overflows the accumulator.
  localparam logic [W-1:0] END_TH = W'((1 << W) - INC);
  // Period of 2*HALF cycles: the look-ahead fires HALF steps from now.
  localparam logic [W-1:0] MID_TH = W'((1 << W) - (HALF + 1) * INC);

  logic [KW-1:0] k_q;        // input cycles since the last period start
  logic [KW-1:0] pos;        // same, for the current cycle
  logic          boundary;   // a new output period starts this cycle
  logic          mid;        // the falling transition is due this cycle
  logic          last_tick;

  assign last_tick   = (tick == TW'(SUPER - 1));
  assign super_start = (tick == '0);
  assign boundary    = super_start || (phase >= END_TH);
  assign pos         = boundary ? '0 : k_q;
  assign mid         = (pos == KW'(HALF));

  always_comb begin
    ev_sel   = EDGE_NONE;
    ev_level = 1'b0;
    if (boundary) begin
      ev_sel   = EDGE_POS;
      ev_level = 1'b1;
    end else if (mid) begin
      ev_sel   = (phase >= MID_TH) ? EDGE_POS : EDGE_NEG;
      ev_level = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      tick  <= '0;
      phase <= '0;
      k_q   <= '0;
    end else begin
      tick  <= last_tick ? '0 : tick + 1'b1;
      phase <= last_tick ? '0 : phase + W'(INC);
      k_q   <= pos + 1'b1;
    end
  end

  dual_edge_reg u_out (
    .clk     (clk),
    .rst     (rst),
    .set_pos (ev_sel == EDGE_POS),
    .val_pos (ev_level),
    .set_neg (ev_sel == EDGE_NEG),
    .val_neg (ev_level),
    .q       (hf_clk)
  );

  // A period is never longer than 2*HALF+1 input cycles (23 by default).
  a_period_len: assert property (@(posedge clk) disable iff (rst)
    pos <= KW'(2 * HALF + 1));

endmodule
