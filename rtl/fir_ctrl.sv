// fir_ctrl: Signal & Clock Control Unit of the systolic FIR filter.
//
// It turns the filter-level rst / en pins into the control bundle shared by all
// processing elements (clock enable and synchronous clear), decodes a
// coefficient write request into a one-hot load strobe for the addressed
// coefficient register, and produces the output-valid flag, which follows an
// accepted sample by one clock (the filter output is registered).
//
// Interface: rst (synchronous, active high), en (one sample per clock while 1),
// coef_we/coef_addr (write request, ignored while rst or when coef_addr is out
// of range). Outputs: ctrl, coef_load[TAPS], out_valid.
// ctrl.clr is rst passed straight through: it is one of the two signals of the
// bundle that every PE receives.
// The paper only names this unit and shows that it drives every PE; what it
// decodes here is this design's choice.
module fir_ctrl
  import algas3_pkg::*;
#(
  parameter int unsigned TAPS   = FIR_TAPS,
  parameter int unsigned A_BITS = (TAPS > 1) ? $clog2(TAPS) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic              coef_we,
  input  logic [A_BITS-1:0] coef_addr,
  output fir_ctrl_t         ctrl,
  output logic [TAPS-1:0]   coef_load,
  output logic              out_valid
);

  always_comb begin
    ctrl.clr = rst;
    ctrl.ce  = en & ~rst;
  end

  always_comb begin
    coef_load = '0;
    for (int unsigned k = 0; k < TAPS; k++)
      if (coef_we && !rst && coef_addr == A_BITS'(k)) coef_load[k] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= en;
  end

endmodule
