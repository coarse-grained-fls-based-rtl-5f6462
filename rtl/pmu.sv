// pmu: Prognostic Malfunction Unit.
//
// The PMU watches the two filtered distance readings of a corner (lidar and
// radar) and predicts a loss of sensor quality. For every accepted sample pair
// it forms the absolute difference |a - b| and accumulates it over a fixed
// frame of FRAME = 2^FRAME_LOG2 = 16 samples. At the end of each frame the mean
// difference (sum >> FRAME_LOG2) is published on mean_diff and alarm is set if
// it exceeds the programmable threshold, otherwise cleared. A persistent
// disagreement between the two sensors points to a failed sensor or to jamming
// of one sensor's frequency band.
//
// Timing: one sample pair per clock while valid = 1. frame_done pulses for one
// clock, with mean_diff and alarm updated, on the clock after the 16th sample
// of a frame; alarm holds its value until the next frame ends.
// rst is synchronous and active high and restarts the frame.
// From the paper: the two sensor inputs, the difference monitoring and the
// fixed 16-sample frame. Own choices: absolute difference, mean over the frame,
// compare against a threshold input, and the output set.
module pmu
  import algas3_pkg::*;
#(
  parameter int unsigned D_BITS     = FIR_M_BITS,
  parameter int unsigned FRAME_LOG2 = PMU_FRAME_LOG2
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              valid,
  input  logic [D_BITS-1:0] a,
  input  logic [D_BITS-1:0] b,
  input  logic [D_BITS-1:0] threshold,
  output logic [D_BITS-1:0] mean_diff,
  output logic              alarm,
  output logic              frame_done
);

  localparam int unsigned ACC_BITS = D_BITS + FRAME_LOG2;

  logic [FRAME_LOG2-1:0] cnt;
  logic [ACC_BITS-1:0]   acc;
  logic [D_BITS-1:0]     diff;
  logic [ACC_BITS-1:0]   acc_next;
  logic [D_BITS-1:0]     mean_next;

  always_comb begin
    diff      = (a >= b) ? (a - b) : (b - a);
    acc_next  = acc + ACC_BITS'(diff);
    mean_next = D_BITS'(acc_next >> FRAME_LOG2);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt        <= '0;
      acc        <= '0;
      mean_diff  <= '0;
      alarm      <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (valid) begin
        if (cnt == {FRAME_LOG2{1'b1}}) begin
          acc        <= '0;
          mean_diff  <= mean_next;
          alarm      <= (mean_next > threshold);
          frame_done <= 1'b1;
        end else begin
          acc <= acc_next;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
