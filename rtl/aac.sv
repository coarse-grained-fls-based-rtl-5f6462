// aac: Adder and Accumulate unit of one systolic FIR processing element.
//
// A Delay Element (register) holds the M-bit partial sum arriving from the
// neighbouring PE ("Input data 1"). The Asymmetric Unsigned Adder adds the
// N-bit product of this PE ("Input data 2") to the delayed sum and drives the
// M-bit result on out_data, which feeds the Delay Element of the next PE
// towards the filter output. The adder is asymmetric because N < M: the product
// is zero-extended. The sum is modulo 2^M; the filter is sized so that the
// largest possible sum fits (see systolic_fir).
//
// Timing: out_data is combinational from in_data2 and the Delay Element; the
// Delay Element loads in_data1 on a rising clock edge when ctrl.ce is 1 and
// clears to zero when ctrl.clr is 1 (clear has priority).
// The structure (delay element + unsigned adder, n-bit and m-bit inputs) follows
// the paper's AAC figure; clear/enable semantics are this design's choice.
module aac
  import algas3_pkg::*;
#(
  parameter int unsigned N_BITS = FIR_V_BITS + FIR_Z_BITS,
  parameter int unsigned M_BITS = FIR_M_BITS
) (
  input  logic              clk,
  input  fir_ctrl_t         ctrl,
  input  logic [M_BITS-1:0] in_data1,
  input  logic [N_BITS-1:0] in_data2,
  output logic [M_BITS-1:0] out_data
);

  logic [M_BITS-1:0] delay_q;

  // Delay Element
  always_ff @(posedge clk) begin
    if (ctrl.clr)     delay_q <= '0;
    else if (ctrl.ce) delay_q <= in_data1;
  end

  // Asymmetric Unsigned Adder
  always_comb out_data = delay_q + M_BITS'(in_data2);

  initial begin
    assert (N_BITS <= M_BITS) else $error("aac: N_BITS must not exceed M_BITS");
  end

endmodule
