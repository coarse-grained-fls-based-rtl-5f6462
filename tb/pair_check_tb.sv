// pair_check_tb: self-checking testbench of the differential pair check.
// Random readings of two opposite cores, some agreeing and some not, are
// compared with a reference; outputs update one clock after valid and hold
// while valid is low.
module pair_check_tb;
  import algas3_pkg::*;
  localparam int unsigned D = FIR_M_BITS;
  logic clk = 0, rst, valid;
  logic [D-1:0] al, ar, bl, br, margin;
  logic [1:0] mm, emm;
  logic [D-1:0] delta [2];
  logic [D-1:0] ed [2];
  int checks = 0, failures = 0;
  int unsigned seen_l = 0, seen_r = 0;

  pair_check dut (.clk, .rst, .valid, .a_lidar(al), .a_radar(ar), .b_lidar(bl), .b_radar(br),
                  .margin, .mismatch(mm), .delta);
  always #5 clk = ~clk;

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [D-1:0] ad(logic [D-1:0] x, logic [D-1:0] y);
    return (x >= y) ? x - y : y - x;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst = 1; valid = 0; al = '0; ar = '0; bl = '0; br = '0; margin = D'(300);
    emm = '0; ed[0] = '0; ed[1] = '0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      valid = $urandom_range(0, 3) != 0;
      al = D'($urandom_range(0, 12000));
      ar = D'($urandom_range(0, 12000));
      bl = D'(al + $urandom_range(0, 600));
      br = ($urandom_range(0, 1) == 1) ? D'(ar + $urandom_range(0, 600)) : D'($urandom_range(0, 16383));
      if (valid) begin
        ed[0] = ad(al, bl); ed[1] = ad(ar, br);
        emm = {ed[1] > margin, ed[0] > margin};
      end
      @(posedge clk); #1;
      check(mm == emm, "mismatch");
      check(delta[0] == ed[0] && delta[1] == ed[1], "delta");
      if (mm[0]) seen_l++;
      if (mm[1]) seen_r++;
    end
    check(seen_l > 0 && seen_r > 0, "both mismatch kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
