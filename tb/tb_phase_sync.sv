// tb_phase_sync: checks the beam-return trigger.
//
// beam_sync is driven asynchronously, at random offsets within the 10 ns
// clock period, with random pulse lengths (one to 40 cycles) and random
// gaps. For every rising edge of beam_sync exactly one restart pulse, one
// cycle long, must follow: it is high in the clock cycle that starts at the
// third rising clock edge at or after the beam_sync edge (two synchronizer
// flops, then the edge detector). The jump counter must equal the number
// of beam_sync pulses.
`timescale 1ns/1ps
module tb_phase_sync;
  logic clk = 1'b0;
  logic rst, beam_sync, restart;
  logic [15:0] jumps;
  int checks = 0, failures = 0;
  int n_pulses = 0, n_restart = 0;
  int cycle = 0;
  int expect_cycle[$];

  phase_sync dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s", $realtime, msg);
    end
  endtask

  always @(posedge clk) begin
    cycle++;
    #1;
    if (!rst) begin
      if (restart) begin
        n_restart++;
        check(expect_cycle.size() > 0 && expect_cycle[0] == cycle,
              $sformatf("restart in cycle %0d, expected %0d", cycle,
                        expect_cycle.size() > 0 ? expect_cycle[0] : -1));
        if (expect_cycle.size() > 0) void'(expect_cycle.pop_front());
      end else if (expect_cycle.size() > 0) begin
        check(expect_cycle[0] > cycle, $sformatf("missing restart for cycle %0d", expect_cycle[0]));
        if (expect_cycle[0] <= cycle) void'(expect_cycle.pop_front());
      end
    end
  end

  initial begin
    rst = 1'b1; beam_sync = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    repeat (300) begin
      int hi, lo;
      real off;
      hi  = $urandom_range(1, 40);
      lo  = $urandom_range(3, 40);
      off = real'($urandom_range(1, 9)) + 0.5;
      @(posedge clk);
      #(off);
      beam_sync = 1'b1;
      n_pulses++;
      // the edge is seen by the next clock edge: it is edge 1, restart is
      // high after edge 3, i.e. the testbench's cycle number + 3
      expect_cycle.push_back(cycle + 3);
      repeat (hi) @(posedge clk);
      #(off);
      beam_sync = 1'b0;
      repeat (lo) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    #2;
    check(n_restart == n_pulses, $sformatf("%0d restarts for %0d pulses", n_restart, n_pulses));
    check(jumps == 16'(n_pulses), $sformatf("jumps=%0d pulses=%0d", jumps, n_pulses));
    $display("beam_sync pulses=%0d restarts=%0d", n_pulses, n_restart);
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
