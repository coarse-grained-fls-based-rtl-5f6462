// aac_tb: self-checking testbench of the AAC unit (delay element + asymmetric
// unsigned adder). Random partial sums, products and control values are
// applied; a reference delay register modelled here predicts out_data, which
// must equal delayed_sum + zero-extended product, modulo 2^M.
module aac_tb;
  import algas3_pkg::*;
  localparam int unsigned N = 11, M = 14;
  logic clk = 0;
  fir_ctrl_t ctrl;
  logic [M-1:0] in1, out;
  logic [N-1:0] in2;
  int checks = 0, failures = 0;
  logic [M-1:0] ref_d;

  aac #(.N_BITS(N), .M_BITS(M)) dut (.clk, .ctrl, .in_data1(in1), .in_data2(in2), .out_data(out));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ctrl = '{ce: 1'b0, clr: 1'b1}; in1 = '0; in2 = '0; ref_d = '0;
    @(posedge clk); #1;
    for (int i = 0; i < 2000; i++) begin
      ctrl.clr = ($urandom_range(0, 31) == 0);
      ctrl.ce  = ($urandom_range(0, 3) != 0);
      in1 = M'($urandom); in2 = N'($urandom);
      if (i % 7 == 0) begin in1 = '1; in2 = '1; end  // wrap-around case
      #1;
      checks++;
      if (out !== M'(ref_d + M'(in2))) begin
        failures++;
        if (failures < 10) $display("mismatch i=%0d out=%0d exp=%0d", i, out, M'(ref_d + M'(in2)));
      end
      @(posedge clk);
      if (ctrl.clr) ref_d = '0; else if (ctrl.ce) ref_d = in1;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
