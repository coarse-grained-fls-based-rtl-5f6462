// pmu_tb: self-checking testbench of the Prognostic Malfunction Unit.
// Sends frames of 16 sample pairs whose disagreement is small, large or
// near the threshold, with idle clocks in between. A reference computes the
// mean absolute difference of each frame; mean_diff, alarm and the one-clock
// frame_done pulse (exactly one clock after the 16th sample) are checked.
// Both alarm raising and clearing must be seen.
module pmu_tb;
  import algas3_pkg::*;
  localparam int unsigned D = FIR_M_BITS;
  logic clk = 0, rst, valid, alarm, done;
  logic [D-1:0] a, b, thr, mean;
  int checks = 0, failures = 0;
  int unsigned raised = 0, cleared = 0;

  pmu dut (.clk, .rst, .valid, .a, .b, .threshold(thr), .mean_diff(mean), .alarm, .frame_done(done));
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned sum, spread, x, d, m;
    logic prev_alarm;
    rst = 1; valid = 0; a = '0; b = '0; thr = D'(200);
    repeat (2) @(posedge clk); #1;
    rst = 0;
    check(!alarm && !done, "reset state");
    prev_alarm = 0;
    for (int f = 0; f < 200; f++) begin
      sum = 0;
      case (f % 4)
        0: spread = 20;     // healthy sensors
        1: spread = 1500;   // one sensor drifting away / jammed
        2: spread = 400;    // around the threshold
        default: spread = $urandom_range(0, 4000);
      endcase
      for (int s = 0; s < PMU_FRAME; s++) begin
        x = $urandom_range(0, 12000);
        d = $urandom_range(0, spread);
        a = D'(x);
        b = ($urandom_range(0, 1) == 1) ? D'(x + d) : D'((x > d) ? x - d : 0);
        sum += (a >= b) ? (a - b) : (b - a);
        valid = 1;
        @(posedge clk); #1;
        valid = 0;
        if (s != PMU_FRAME - 1) begin
          check(!done, "no frame_done mid-frame");
          if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; check(!done, "no frame_done idle"); end
        end
      end
      m = sum >> PMU_FRAME_LOG2;
      check(done, "frame_done after 16th sample");
      check(mean == D'(m), "mean_diff");
      check(alarm == (m > thr), "alarm");
      if (alarm && !prev_alarm) raised++;
      if (!alarm && prev_alarm) cleared++;
      prev_alarm = alarm;
      @(posedge clk); #1;
      check(!done, "frame_done lasts one clock");
      check(alarm == prev_alarm, "alarm held");
    end
    check(raised > 0 && cleared > 0, "alarm raised and cleared");
    $display("alarm raised %0d times, cleared %0d times", raised, cleared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
