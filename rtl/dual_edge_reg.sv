// dual_edge_reg: a one-bit output register that can change on either edge
// of its clock.
//
// A purely digital clock generator can only move its outputs on input
// clock edges. Using both the rising and the falling edge halves that
// grid, from 10 ns to 5 ns at 100 MHz, which is what lets the 4.42 MHz
// generator use 115 ns half-periods and the 295 kHz generator land on a
// falling edge of the 4.42 MHz clock. The paper only states that special
// logic transitions on falling edges; the circuit here is this design's
// own: the output is the XOR of a rising-edge flop p and a falling-edge
// flop n. Each flop is written so that the XOR takes the requested level:
//   rising edge:  p <= val_pos ^ n   (n is stable at a rising edge)
//   falling edge: n <= val_neg ^ p   (p is stable at a falling edge)
// so the output is never a toggle of unknown polarity but an absolute
// level, and no flop is clocked by anything but clk.
//
// Timing: set_pos/val_pos are sampled at a rising edge and q takes val_pos
// right after that edge. set_neg/val_neg are sampled at the same rising
// edge and q takes val_neg at the following falling edge, half a cycle
// later. If both are asserted, q shows val_pos for half a cycle and then
// val_neg. rst is synchronous; q is 0 after it. The output is a glitch-free
// XOR only as long as p and n never change together, which holds because
// they are clocked on opposite edges.
module dual_edge_reg (
  input  logic clk,
  input  logic rst,
  input  logic set_pos,
  input  logic val_pos,
  input  logic set_neg,
  input  logic val_neg,
  output logic q
);

  logic p, n;
  logic neg_pending, neg_value;

  always_ff @(posedge clk) begin
    if (rst) begin
      p           <= 1'b0;
      neg_pending <= 1'b0;
      neg_value   <= 1'b0;
    end else begin
      if (set_pos) p <= val_pos ^ n;
      neg_pending <= set_neg;
      neg_value   <= val_neg;
    end
  end

  always_ff @(negedge clk) begin
    if (rst)              n <= 1'b0;
    else if (neg_pending) n <= neg_value ^ p;
  end

  assign q = p ^ n;

endmodule
