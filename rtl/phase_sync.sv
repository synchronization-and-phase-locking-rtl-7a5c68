// phase_sync: turns the upstream beam timing signal into a phase jump.
//
// Beam reaches the AC dipole in 1,695 ns pulses only during spills: eight
// spills in 380 ms separated by 5 ms gaps, then 1,020 ms with no beam.
// When beam returns after any gap, the clock generators must restart in
// phase with it. An upstream timing signal marks that moment; this block
// brings it into the 100 MHz domain through a SYNC_STAGES-flop
// synchronizer (the signal is asynchronous to the local clock) and emits a
// one-cycle 'restart' pulse on its rising edge. That the phase is reset on
// an upstream timing signal is the paper's; the synchronizer, the
// rising-edge trigger and the jump counter are this design's choices. The
// paper leaves the compensation of the timing signal's propagation delay
// to future work, and none is applied here.
//
// Timing: 'restart' is high for exactly one clk cycle, SYNC_STAGES+1
// rising edges after beam_sync goes high (SYNC_STAGES flops, then the edge
// detector). A level held high gives one pulse. 'jumps' counts pulses since
// reset and wraps.
module phase_sync #(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned CNT_W       = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             beam_sync,   // asynchronous, active high
  output logic             restart,
  output logic [CNT_W-1:0] jumps
);

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   prev_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q  <= '0;
      prev_q  <= 1'b0;
      restart <= 1'b0;
      jumps   <= '0;
    end else begin
      sync_q  <= {sync_q[SYNC_STAGES-2:0], beam_sync};
      prev_q  <= sync_q[SYNC_STAGES-1];
      restart <= sync_q[SYNC_STAGES-1] && !prev_q;
      if (sync_q[SYNC_STAGES-1] && !prev_q) jumps <= jumps + 1'b1;
    end
  end

endmodule
