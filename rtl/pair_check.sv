// pair_check: differential confirmation between two spatially opposite cores.
//
// Opposite corners of the drone (front/back, left/right) form a differential
// pair: the distances each measures to the landing area are continuously
// compared and must agree within a preset margin. The check is done per
// sensor type: the filtered lidar readings of the two cores are compared with
// each other, and so are the filtered radar readings. mismatch[0] (lidar) or
// mismatch[1] (radar) is set when the absolute difference exceeds margin;
// delta holds the two absolute differences.
//
// Timing: outputs are registered and update on the clock after valid = 1
// (valid must mark a clock where both cores present a new filtered sample).
// rst is synchronous and active high.
// The paper gives the purpose (doubled confirmation within a preset margin);
// the per-sensor comparison, the margin input and the output form are this
// design's choices.
module pair_check
  import algas3_pkg::*;
#(
  parameter int unsigned D_BITS = FIR_M_BITS
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              valid,
  input  logic [D_BITS-1:0] a_lidar,
  input  logic [D_BITS-1:0] a_radar,
  input  logic [D_BITS-1:0] b_lidar,
  input  logic [D_BITS-1:0] b_radar,
  input  logic [D_BITS-1:0] margin,
  output logic [1:0]        mismatch,
  output logic [D_BITS-1:0] delta [2]
);

  function automatic logic [D_BITS-1:0] absdiff(logic [D_BITS-1:0] x, logic [D_BITS-1:0] y);
    return (x >= y) ? (x - y) : (y - x);
  endfunction

  logic [D_BITS-1:0] d_lidar, d_radar;

  always_comb begin
    d_lidar = absdiff(a_lidar, b_lidar);
    d_radar = absdiff(a_radar, b_radar);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mismatch <= '0;
      delta[0] <= '0;
      delta[1] <= '0;
    end else if (valid) begin
      mismatch <= {d_radar > margin, d_lidar > margin};
      delta[0] <= d_lidar;
      delta[1] <= d_radar;
    end
  end

endmodule
