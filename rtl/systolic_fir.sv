// systolic_fir: 15-tap systolic moving-average FIR filter of one sensor channel.
//
// The filter is in transposed (systolic) form: every accepted input sample is
// broadcast to all TAPS processing elements; PE k multiplies it by coefficient
// c_k and adds the partial sum that PE k+1 produced for the previous sample,
// held in its delay element. The farthest PE receives 0. PE 0's sum is
// registered as the output, so after sample x[n] is accepted
//     data_out = sum_{k=0}^{TAPS-1} c_k * x[n-k]      (modulo 2^M_BITS)
// one clock later, with data_valid = 1 for that clock. One sample per clock.
// With the default unit coefficients the output is the sum of the last 15
// samples: a moving average scaled by 15. The 14-bit output then never wraps,
// since 15 * (2^10 - 1) < 2^14; larger coefficients must keep
// sum(c_k) * (2^V_BITS - 1) below 2^M_BITS. Coefficients may be rewritten at
// any time; the TAPS-1 outputs that follow a change mix old and new
// coefficients, because those partial sums are already in the chain.
//
// From the paper: 15 taps, PE structure (coefficient register, multiplier,
// AAC), chain direction, input 0 at the far end, rst/en/data_in/data_out pins
// and the 14-bit output. Own choices: 10-bit input, 1-bit coefficients,
// synchronous active-high reset, the coefficient write/read-back port, the output
// register and data_valid.
module systolic_fir
  import algas3_pkg::*;
#(
  parameter int unsigned TAPS   = FIR_TAPS,
  parameter int unsigned V_BITS = FIR_V_BITS,
  parameter int unsigned Z_BITS = FIR_Z_BITS,
  parameter int unsigned M_BITS = FIR_M_BITS,
  parameter int unsigned A_BITS = (TAPS > 1) ? $clog2(TAPS) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic [V_BITS-1:0] data_in,
  input  logic              coef_we,
  input  logic [A_BITS-1:0] coef_addr,
  input  logic [Z_BITS-1:0] coef_data,
  output logic [Z_BITS-1:0] coef_rd,
  output logic [M_BITS-1:0] data_out,
  output logic              data_valid
);

  fir_ctrl_t          ctrl;
  logic [TAPS-1:0]    coef_load;
  logic [M_BITS-1:0]  sum [TAPS+1];
  logic [Z_BITS-1:0]  coef [TAPS];

  fir_ctrl #(.TAPS(TAPS), .A_BITS(A_BITS)) u_ctrl (
    .clk       (clk),
    .rst       (rst),
    .en        (en),
    .coef_we   (coef_we),
    .coef_addr (coef_addr),
    .ctrl      (ctrl),
    .coef_load (coef_load),
    .out_valid (data_valid)
  );

  assign sum[TAPS] = '0;   // input of the far end of the chain

  for (genvar k = 0; k < TAPS; k++) begin : g_pe
    fir_pe #(.V_BITS(V_BITS), .Z_BITS(Z_BITS), .M_BITS(M_BITS)) u_pe (
      .clk       (clk),
      .rst       (rst),
      .ctrl      (ctrl),
      .coef_load (coef_load[k]),
      .coef_data (coef_data),
      .data_in   (data_in),
      .sum_in    (sum[k+1]),
      .sum_out   (sum[k]),
      .coef      (coef[k])
    );
  end

  // Read-back of the coefficient register selected by coef_addr.
  always_comb begin
    coef_rd = '0;
    for (int unsigned k = 0; k < TAPS; k++)
      if (coef_addr == A_BITS'(k)) coef_rd = coef[k];
  end

  always_ff @(posedge clk) begin
    if (ctrl.clr)     data_out <= '0;
    else if (ctrl.ce) data_out <= sum[0];
  end

endmodule
