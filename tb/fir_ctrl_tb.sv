// fir_ctrl_tb: self-checking testbench of the FIR Signal & Clock Control Unit.
// Random rst/en/coefficient-write requests; checks the PE control bundle, the
// one-hot coefficient load strobes (none for out-of-range addresses or during
// reset) and that out_valid follows en by exactly one clock.
module fir_ctrl_tb;
  import algas3_pkg::*;
  localparam int unsigned TAPS = 15, A = 4;
  logic clk = 0, rst, en, we, ovalid;
  logic [A-1:0] addr;
  fir_ctrl_t ctrl;
  logic [TAPS-1:0] load;
  int checks = 0, failures = 0;
  logic exp_valid;

  fir_ctrl #(.TAPS(TAPS)) dut (.clk, .rst, .en, .coef_we(we), .coef_addr(addr),
                               .ctrl, .coef_load(load), .out_valid(ovalid));
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
    rst = 1; en = 0; we = 0; addr = '0; exp_valid = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 3000; i++) begin
      rst  = ($urandom_range(0, 15) == 0);
      en   = $urandom_range(0, 1);
      we   = $urandom_range(0, 1);
      addr = A'($urandom);
      #1;
      check(ctrl.clr == rst, "clr");
      check(ctrl.ce == (en && !rst), "ce");
      for (int k = 0; k < TAPS; k++)
        check(load[k] == (we && !rst && addr == A'(k)), "load");
      check($countones(load) <= 1, "onehot");
      check(ovalid == exp_valid, "out_valid");
      @(posedge clk);
      exp_valid = rst ? 1'b0 : en;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
