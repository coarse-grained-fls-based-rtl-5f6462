// algas3_core_tb: self-checking testbench of one ALGAS3 core at default sizes.
// Lidar and radar streams follow a noisy landing profile; in some stretches
// the radar is disturbed (offset and heavy noise, as if jammed) so that the
// PMU alarm rises and falls. Coefficients of one filter are reprogrammed
// mid-run, idle clocks are inserted, and random flight-rule conditions are
// applied. Every output is compared each clock with the core_ref model.
module algas3_core_tb;
  import algas3_pkg::*;
  import algas3_ref_pkg::*;
  localparam int unsigned M = FIR_M_BITS;

  logic clk = 0, rst, en, rule_we;
  logic [FIR_V_BITS-1:0] lidar, radar;
  logic [1:0] coef_we;
  logic [3:0] coef_addr;
  logic [FIR_Z_BITS-1:0] coef_data;
  logic [FIR_Z_BITS-1:0] coef_rd [2];
  logic [M-1:0] thr, pmu_mean, lf, rf;
  logic pmu_alarm, pmu_done, fv;
  logic [FRU_CONDS-1:0] cond;
  logic [2:0] rule_addr;
  fru_rule_t rule_wdata;
  logic [FRU_ACTS-1:0] act;
  logic [FRU_RULES-1:0] hit;
  int checks = 0, failures = 0;
  int unsigned n_alarm = 0, n_frames = 0, n_hit0 = 0, n_hit1 = 0;
  core_ref mdl;

  algas3_core dut (
    .clk, .rst, .sample_en(en), .lidar_data(lidar), .radar_data(radar),
    .coef_we, .coef_addr, .coef_data, .coef_rd, .pmu_threshold(thr),
    .pmu_mean, .pmu_alarm, .pmu_frame_done(pmu_done), .lidar_filt(lf), .radar_filt(rf),
    .filt_valid(fv), .fls_cond(cond), .rule_we, .rule_addr, .rule_wdata,
    .fru_act(act), .fru_hit(hit));
  always #5 clk = ~clk;

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int dst, r;
    mdl = new();
    rst = 1; en = 0; lidar = '0; radar = '0; coef_we = '0; coef_addr = '0; coef_data = '0;
    thr = M'(400); cond = '0; rule_we = 0; rule_addr = '0; rule_wdata = '0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      dst = 500 - (410 * i) / 4000;
      en = ($urandom_range(0, 7) != 0);
      lidar = FIR_V_BITS'(dst + $urandom_range(0, 40) - 20);
      r = dst + $urandom_range(0, 40) - 20;
      if ((i / 500) % 2 == 1) r = r + 150 + $urandom_range(0, 200);   // disturbed radar
      radar = FIR_V_BITS'(r > 1023 ? 1023 : r);
      cond = FRU_CONDS'($urandom);
      coef_we = (i == 2200) ? 2'b10 : 2'b00;
      coef_addr = 4'(i % 15); coef_data = 1'b0;
      mdl.step(en, lidar, radar, coef_we, coef_addr, coef_data, thr, cond, 0, 0, '0);
      @(posedge clk); #1;
      check(fv == mdl.filt_valid, "filt_valid");
      check(lf == M'(mdl.filt[0]) && rf == M'(mdl.filt[1]), "filtered outputs");
      check(pmu_done == mdl.pmu_done, "pmu frame_done");
      check(pmu_alarm == mdl.pmu_alarm && pmu_mean == M'(mdl.pmu_mean), "pmu result");
      check(act == mdl.act && hit == mdl.hit, "fru");
      if (pmu_done) n_frames++;
      if (pmu_done && pmu_alarm) n_alarm++;
      if (hit[0]) n_hit0++;
      if (hit[1]) n_hit1++;
    end
    check(n_alarm > 0 && n_alarm < n_frames, "alarm both raised and clear");
    check(n_hit0 > 0 && n_hit1 > 0, "both default rules fired");
    $display("frames=%0d alarms=%0d rule0=%0d rule1=%0d", n_frames, n_alarm, n_hit0, n_hit1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
