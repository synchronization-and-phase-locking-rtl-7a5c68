// lf_clkgen: 295 kHz clock cascaded from the 4.42 MHz clock.
//
// The 4.42 MHz clock is the 15th harmonic of the 294.985 kHz carrier, so
// one carrier half-period (1,695 ns, the proton pulse spacing) is 7.5
// periods of the 4.42 MHz clock, i.e. 15 of its edges. This block counts
// edges of the 4.42 MHz clock and changes its output on every 15th one.
// Because 15 is odd, its transitions fall alternately on a rising and on
// a falling edge of the 4.42 MHz clock, as the paper requires.
//
// Cascading here is done with a clock enable rather than by clocking the
// counter from the generated clock: hf_clkgen announces each of its edges
// one cycle ahead (ev_sel/ev_level, EDGE_POS or EDGE_NEG), this block
// counts those announcements in the 100 MHz domain and, on the 15th, makes
// its own transition through the same kind of dual-edge register, so that
// both outputs move at the same instant. Counting 15 edges and the
// rising/falling alternation follow the paper; the clock-enable form, and
// where the count starts after a phase jump, are this design's choices.
//
// Start phase: the 4.42 MHz edge transitions inside a 113-cycle supercycle
// sit at 0, 11, 22, 33.5, 45, 56, 67, 78.5, 90 and 101.5 input cycles. A
// carrier half-period is 169.5 cycles, so only some starting edges give
// exactly 1,695 ns for every half-period; FIRST_EDGE = 2 (the rise at
// cycle 22) is one of them, and every 295 kHz transition then lies
// 1,695 ns after the previous one. Starting at edge 0 would give 1,690 and
// 1,700 ns instead.
//
// Interface and timing: 'restart' is the same one-cycle phase-jump pulse
// given to hf_clkgen; in that cycle the output is set high (at the coming
// rising edge) and the count is preset so that the first transition, a
// fall, comes on 4.42 MHz edge number FIRST_EDGE, counting the rise that
// opens the new supercycle as edge 0. rst clears the output and presets
// the count the same way, so after reset the first transition, on the same
// edge, is a rise instead.
module lf_clkgen
  import acd_pkg::*;
#(
  parameter int unsigned HALF_EDGES = LF_HALF_EDGES,
  parameter int unsigned FIRST_EDGE = FIRST_LF_EDGE
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      restart,
  input  edge_sel_e hf_ev_sel,   // 4.42 MHz edge announced this cycle
  output logic      lf_clk,
  output edge_sel_e ev_sel,      // own transition announced this cycle
  output logic      ev_level
);

  localparam int unsigned CW = $clog2(HALF_EDGES);
  localparam logic [CW-1:0] PRESET = CW'(HALF_EDGES - FIRST_EDGE - 1);

  logic [CW-1:0] cnt;    // 4.42 MHz edges counted in this half-period
  logic          level;  // level of lf_clk after all announced transitions
  logic          fire;

  assign fire = (hf_ev_sel != EDGE_NONE) && (cnt == CW'(HALF_EDGES - 1));

  always_comb begin
    ev_sel   = EDGE_NONE;
    ev_level = level;
    if (restart) begin
      ev_sel   = EDGE_POS;
      ev_level = 1'b1;
    end else if (fire) begin
      ev_sel   = hf_ev_sel;
      ev_level = ~level;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= PRESET;
      level <= 1'b0;
    end else if (restart) begin
      cnt   <= PRESET;
      level <= 1'b1;
    end else if (hf_ev_sel != EDGE_NONE) begin
      cnt   <= fire ? '0 : cnt + 1'b1;
      level <= fire ? ~level : level;
    end
  end

  dual_edge_reg u_out (
    .clk     (clk),
    .rst     (rst),
    .set_pos (ev_sel == EDGE_POS),
    .val_pos (ev_level),
    .set_neg (ev_sel == EDGE_NEG),
    .val_neg (ev_level),
    .q       (lf_clk)
  );

  a_cnt_range: assert property (@(posedge clk) disable iff (rst)
    cnt < CW'(HALF_EDGES));

endmodule
