// acd_clkgen_top: timing core of the Mu2e AC-dipole controller.
//
// From one 100 MHz clock it makes the two drive clocks of the dual-harmonic
// AC dipole: the 294.985 kHz carrier (half-period 1,695 ns, the proton
// pulse spacing) and its 15th harmonic at 4.42 MHz, both switching at the
// same instants so that beam pulses pass at the field nodes. A phase jump
// restarts both in a fixed phase whenever the upstream timing signal marks
// the return of beam after a gap. The structure is:
//
//   beam_sync --> phase_sync --restart--> hf_clkgen --hf_clk (4.42 MHz)
//                                  |          | ev_sel (edge announcements)
//                                  +------> lf_clkgen --lf_clk (295 kHz)
//
// All logic is clocked by clk; outputs change on its rising or falling
// edge, a 5 ns grid. hf_clk periods are 22,23,22,23,23 cycles (226 ns on
// average); every lf_clk half-period is 169.5 cycles, 1,695 ns, and each
// lf_clk transition coincides with an hf_clk transition. After a restart
// pulse the new supercycle starts one cycle later with an hf_clk rise;
// lf_clk is set high in the restart cycle and first falls 22 cycles after
// that rise. rst is synchronous and active high; the power supplies, the
// timing system and the FPGA board lie outside this module and connect
// through its ports.
module acd_clkgen_top
  import acd_pkg::*;
(
  input  logic        clk,          // 100 MHz
  input  logic        rst,          // synchronous, active high
  input  logic        beam_sync,    // upstream beam-return timing, asynchronous
  output logic        hf_clk,       // 4.42 MHz drive clock
  output logic        lf_clk,       // 295 kHz drive clock
  output logic        super_start,  // first cycle of a 113-cycle supercycle
  output logic        phase_jump,   // one-cycle pulse: phase restart
  output logic [15:0] jump_count,   // phase jumps since reset
  output logic [6:0]  hf_tick,      // input cycle within the supercycle
  output logic [11:0] hf_phase      // phase accumulator, for monitoring
);

  edge_sel_e hf_ev_sel;

  phase_sync #(.SYNC_STAGES(2), .CNT_W(16)) u_sync (
    .clk       (clk),
    .rst       (rst),
    .beam_sync (beam_sync),
    .restart   (phase_jump),
    .jumps     (jump_count)
  );

  hf_clkgen u_hf (
    .clk         (clk),
    .rst         (rst),
    .restart     (phase_jump),
    .hf_clk      (hf_clk),
    .ev_sel      (hf_ev_sel),
    .ev_level    (),
    .super_start (super_start),
    .tick        (hf_tick),
    .phase       (hf_phase)
  );

  lf_clkgen u_lf (
    .clk       (clk),
    .rst       (rst),
    .restart   (phase_jump),
    .hf_ev_sel (hf_ev_sel),
    .lf_clk    (lf_clk),
    .ev_sel    (),
    .ev_level  ()
  );

endmodule
