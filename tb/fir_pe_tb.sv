// fir_pe_tb: self-checking testbench of one FIR processing element, run with a
// 3-bit coefficient so that the multiplier is exercised. Checks the reset value
// of the coefficient register, coefficient loads, and
// sum_out = delayed(sum_in) + data_in * coef.
module fir_pe_tb;
  import algas3_pkg::*;
  localparam int unsigned V = 10, Z = 3, M = 14;
  logic clk = 0, rst, load;
  fir_ctrl_t ctrl;
  logic [Z-1:0] cdata, coef, ref_c;
  logic [V-1:0] din;
  logic [M-1:0] sin, sout, ref_d;
  int checks = 0, failures = 0;

  fir_pe #(.V_BITS(V), .Z_BITS(Z), .M_BITS(M)) dut (
    .clk, .rst, .ctrl, .coef_load(load), .coef_data(cdata), .data_in(din),
    .sum_in(sin), .sum_out(sout), .coef);
  always #5 clk = ~clk;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; ctrl = '{ce: 1'b0, clr: 1'b1}; load = 0; cdata = '0; din = '0; sin = '0;
    @(posedge clk); #1;
    ref_c = Z'(1); ref_d = '0;
    check(coef == Z'(1), "coef reset value");
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      ctrl.clr = ($urandom_range(0, 63) == 0);
      ctrl.ce  = ($urandom_range(0, 3) != 0);
      load  = ($urandom_range(0, 7) == 0);
      cdata = Z'($urandom);
      din   = V'($urandom);
      sin   = M'($urandom);
      #1;
      check(coef == ref_c, "coef");
      check(sout == M'(ref_d + M'(din) * M'(ref_c)), "sum_out");
      @(posedge clk);
      if (load) ref_c = cdata;
      if (ctrl.clr) ref_d = '0; else if (ctrl.ce) ref_d = sin;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
