// fru_tb: self-checking testbench of the Flight Rules Unit.
// First checks the two reset-default flight rules on all 256 condition
// patterns, then writes random rules into every slot and compares hit/act with
// a reference rule evaluator for random conditions. Outputs must follow the
// conditions by one clock.
module fru_tb;
  import algas3_pkg::*;
  localparam int unsigned R = FRU_RULES;
  logic clk = 0, rst, we;
  logic [FRU_CONDS-1:0] cond;
  logic [$clog2(R)-1:0] addr;
  fru_rule_t wdata;
  logic [FRU_ACTS-1:0] act;
  logic [R-1:0] hit;
  fru_rule_t model [R];
  int checks = 0, failures = 0;
  int unsigned fired0 = 0, fired1 = 0;

  fru dut (.clk, .rst, .cond, .rule_we(we), .rule_addr(addr), .rule_wdata(wdata), .act, .hit);
  always #5 clk = ~clk;

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic apply_and_check(logic [FRU_CONDS-1:0] c);
    logic [R-1:0] eh;
    logic [FRU_ACTS-1:0] ea;
    cond = c;
    eh = '0; ea = '0;
    for (int i = 0; i < R; i++) begin
      eh[i] = model[i].valid && ((c & model[i].care) == (model[i].match & model[i].care));
      if (eh[i]) ea |= model[i].act;
    end
    @(posedge clk); #1;
    check(hit == eh, "hit");
    check(act == ea, "act");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; we = 0; cond = '0; addr = '0; wdata = '0;
    foreach (model[i]) model[i] = '0;
    // example rule 1: NOT landing, beacon weak, away from beacon
    model[0].valid = 1;
    model[0].care  = 8'b0000_0111; model[0].match = 8'b0000_0110;
    model[0].act   = 8'b0000_0011;
    // example rule 2: landing, optical/uWave/UWB very noisy
    model[1].valid = 1;
    model[1].care  = 8'b0011_1001; model[1].match = 8'b0011_1001;
    model[1].act   = 8'b0011_1100;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int c = 0; c < 256; c++) begin
      apply_and_check(FRU_CONDS'(c));
      if (hit[0]) fired0++;
      if (hit[1]) fired1++;
    end
    check(fired0 == 32 && fired1 == 16, "default rules fire on the expected number of patterns");
    // random rule programming
    for (int i = 0; i < R; i++) begin
      wdata = fru_rule_t'({$urandom, $urandom});
      wdata.care &= FRU_CONDS'($urandom) | FRU_CONDS'($urandom);  // fewer cares: more hits
      model[i] = wdata;
      @(negedge clk); we = 1; addr = $clog2(R)'(i);
      @(posedge clk); #1; we = 0;
    end
    for (int t = 0; t < 2000; t++) apply_and_check(FRU_CONDS'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
