// fir_pe: one processing element of the systolic moving-average FIR filter.
//
// Following the paper's FIR block diagram, a PE holds a Z-bit coefficient
// register c_k, multiplies the V-bit input sample (broadcast to all PEs) by
// c_k to give a Q = V+Z bit product, and passes the product to its Adder and
// Accumulate unit (aac), which adds it to the partial sum received from the
// next PE one sample earlier.
//
// The coefficient register resets to COEF_INIT (1: a unit-weight moving
// average) and is rewritten with coef_data when coef_load is 1. Reset value,
// load port and the 1-bit default coefficient width are this design's choices.
// Timing: sum_out is combinational from data_in (see aac).
module fir_pe
  import algas3_pkg::*;
#(
  parameter int unsigned V_BITS = FIR_V_BITS,
  parameter int unsigned Z_BITS = FIR_Z_BITS,
  parameter int unsigned M_BITS = FIR_M_BITS,
  parameter logic [Z_BITS-1:0] COEF_INIT = Z_BITS'(1)
) (
  input  logic              clk,
  input  logic              rst,
  input  fir_ctrl_t         ctrl,
  input  logic              coef_load,
  input  logic [Z_BITS-1:0] coef_data,
  input  logic [V_BITS-1:0] data_in,
  input  logic [M_BITS-1:0] sum_in,
  output logic [M_BITS-1:0] sum_out,
  output logic [Z_BITS-1:0] coef
);

  localparam int unsigned Q_BITS = V_BITS + Z_BITS;

  logic [Q_BITS-1:0] prod;

  // Coefficient register
  always_ff @(posedge clk) begin
    if (rst)            coef <= COEF_INIT;
    else if (coef_load) coef <= coef_data;
  end

  // Multiplier
  always_comb prod = Q_BITS'(data_in) * Q_BITS'(coef);

  aac #(.N_BITS(Q_BITS), .M_BITS(M_BITS)) u_aac (
    .clk      (clk),
    .ctrl     (ctrl),
    .in_data1 (sum_in),
    .in_data2 (prod),
    .out_data (sum_out)
  );

endmodule
