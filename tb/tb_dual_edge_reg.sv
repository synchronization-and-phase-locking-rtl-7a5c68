// tb_dual_edge_reg: random test of the dual-edge output register.
//
// A reference level is kept in the testbench: at each rising edge it takes
// val_pos if set_pos, and the request set_neg/val_neg sampled at that edge
// is applied at the following falling edge. q is compared with it in the
// middle of both halves of every clock cycle, so a transition that lands
// on the wrong edge is caught. Clock period 10 ns.
`timescale 1ns/1ps
module tb_dual_edge_reg;
  logic clk = 1'b0;
  logic rst, set_pos, val_pos, set_neg, val_neg, q;
  int   checks = 0, failures = 0;
  logic ref_q = 1'b0;
  logic pend = 1'b0, pend_v = 1'b0;
  int   neg_moves = 0, pos_moves = 0;

  dual_edge_reg dut (.*);

  always #5 clk = ~clk;

  // Reference model
  always @(edge clk) begin
    if (clk) begin
      if (rst) begin
        ref_q <= 1'b0; pend <= 1'b0;
      end else begin
        if (set_pos) begin
          if (ref_q != val_pos) pos_moves++;
          ref_q <= val_pos;
        end
        pend   <= set_neg;
        pend_v <= val_neg;
      end
    end else if (!rst && pend) begin
      if (ref_q != pend_v) neg_moves++;
      ref_q <= pend_v;
    end
  end

  task automatic check_q(string where);
    checks++;
    if (q !== ref_q) begin
      failures++;
      $display("FAIL %s t=%0t q=%0b expected %0b", where, $time, q, ref_q);
    end
  endtask

  initial begin
    rst = 1'b1; set_pos = 0; val_pos = 0; set_neg = 0; val_neg = 0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    repeat (4000) begin
      @(posedge clk);
      #1;
      set_pos = ($urandom_range(0, 2) == 0);
      val_pos = $urandom_range(0, 1) == 1;
      set_neg = ($urandom_range(0, 2) == 0);
      val_neg = $urandom_range(0, 1) == 1;
      #1.5 check_q("first half");
      #5   check_q("second half");
    end
    checks++;
    if (neg_moves < 100 || pos_moves < 100) begin
      failures++;
      $display("FAIL too few transitions: pos=%0d neg=%0d", pos_moves, neg_moves);
    end
    $display("transitions on rising edges=%0d falling edges=%0d", pos_moves, neg_moves);
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
