// acd_pkg: constants shared by the AC-dipole clock generators.
//
// The design makes the two drive clocks of a dual-harmonic AC dipole,
// 4.42 MHz (15th harmonic) and 294.985 kHz (carrier), from a 100 MHz
// system clock using only digital logic. The numbers below are the ones
// the design is built around:
//   - 100 MHz input clock, 10 ns period; outputs may change on either
//     clock edge, so transitions are placed on a 5 ns grid.
//   - 4.42 MHz: a 12-bit phase accumulator advanced by 181 per input cycle
//     (4096 * 10 ns / 226 ns = 181.239, rounded down), restarted every
//     113 input cycles, the length of five output periods (22,23,22,23,23).
//   - 295 kHz: one half-period is 7.5 periods of the 4.42 MHz clock, i.e.
//     15 of its edges, 1,695 ns.
// The edge offset of the first 295 kHz transition after a phase restart
// (FIRST_LF_EDGE) is a choice of this design, see lf_clkgen.
package acd_pkg;

  localparam int unsigned ACC_W          = 12;   // phase accumulator width
  localparam int unsigned PHASE_INC      = 181;  // accumulator step per input cycle
  localparam int unsigned SUPER_CYCLES   = 113;  // input cycles per 5-period supercycle
  localparam int unsigned HF_HALF_CYCLES = 11;   // whole input cycles before a mid-period transition
  localparam int unsigned LF_HALF_EDGES  = 15;   // 4.42 MHz edges per 295 kHz half-period
  localparam int unsigned FIRST_LF_EDGE  = 2;    // 4.42 MHz edge index of first 295 kHz transition

  // Where an output transition lands relative to the input clock.
  typedef enum logic [1:0] {
    EDGE_NONE = 2'd0,   // no transition this cycle
    EDGE_POS  = 2'd1,   // on the coming rising edge
    EDGE_NEG  = 2'd2    // on the falling edge half a cycle later
  } edge_sel_e;

endpackage
