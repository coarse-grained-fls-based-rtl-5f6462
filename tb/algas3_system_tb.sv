// algas3_system_tb: end-to-end testbench of the four-core ALGAS3 system at its
// default parameters (also used as the full-size test).
//
// A landing descent is played to all four corners, sampled in step, with idle
// clocks. Phases: level descent; a tilt (front corner reads farther than the
// back) that must trip the front/back pair check; a jammed radar on the left
// corner that must raise that core's PMU alarm and the left/right radar pair
// check; recovery, where alarms must clear. Filter coefficients of the right
// core are reprogrammed and a new flight rule is written into the back core
// mid-run. Every output of every core and pair is compared each clock with
// per-core reference models; each mechanism is counted and must occur.
module algas3_system_tb;
  import algas3_pkg::*;
  import algas3_ref_pkg::*;
  localparam int unsigned M = FIR_M_BITS, V = FIR_V_BITS, NC = N_CORES;

  logic clk = 0, rst;
  logic                 sample_en  [NC];
  logic [V-1:0]         lidar_data [NC];
  logic [V-1:0]         radar_data [NC];
  logic [1:0]           coef_we    [NC];
  logic [3:0]           coef_addr;
  logic [FIR_Z_BITS-1:0] coef_data;
  logic [FIR_Z_BITS-1:0] coef_rd   [NC][2];
  logic [M-1:0]         thr, margin;
  logic [M-1:0]         pmu_mean   [NC];
  logic                 pmu_alarm  [NC];
  logic                 pmu_done   [NC];
  logic [M-1:0]         lf [NC];
  logic [M-1:0]         rf [NC];
  logic                 fv [NC];
  logic [FRU_CONDS-1:0] cond [NC];
  logic                 rule_we [NC];
  logic [2:0]           rule_addr;
  fru_rule_t            rule_wdata;
  logic [FRU_ACTS-1:0]  act [NC];
  logic [FRU_RULES-1:0] hit [NC];
  logic [1:0]           pmm [2];
  logic [M-1:0]         pdelta [2][2];

  int checks = 0, failures = 0;
  core_ref mdl [NC];
  logic [1:0]   exp_pmm [2];
  int unsigned  exp_pd  [2][2];

  // mechanism counters
  int unsigned n_samples = 0, n_idle = 0, n_coef_writes = 0, n_rule_writes = 0;
  int unsigned n_alarm_raise = 0, n_alarm_clear = 0, n_pair_lidar = 0, n_pair_radar = 0;
  int unsigned n_rule0 = 0, n_rule1 = 0, n_rule_new = 0;
  logic prev_alarm [NC];

  algas3_system dut (
    .clk, .rst, .sample_en, .lidar_data, .radar_data, .coef_we, .coef_addr, .coef_data,
    .coef_rd, .pmu_threshold(thr), .pmu_mean, .pmu_alarm, .pmu_frame_done(pmu_done),
    .lidar_filt(lf), .radar_filt(rf), .filt_valid(fv), .fls_cond(cond), .rule_we,
    .rule_addr, .rule_wdata, .fru_act(act), .fru_hit(hit), .pair_margin(margin),
    .pair_mismatch(pmm), .pair_delta(pdelta));
  always #5 clk = ~clk;

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int unsigned ad(int unsigned x, int unsigned y);
    return (x >= y) ? x - y : y - x;
  endfunction

  function automatic logic [V-1:0] clip(int x);
    return (x < 0) ? '0 : (x > 1023) ? V'(1023) : V'(x);
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NSTEP = 6000;

  initial begin
    int base, off, rj;
    bit en;
    fru_rule_t new_rule;
    for (int c = 0; c < NC; c++) begin
      mdl[c] = new(); prev_alarm[c] = 0;
      sample_en[c] = 0; lidar_data[c] = '0; radar_data[c] = '0; coef_we[c] = '0;
      cond[c] = '0; rule_we[c] = 0;
    end
    exp_pmm[0] = '0; exp_pmm[1] = '0;
    for (int p = 0; p < 2; p++) for (int s = 0; s < 2; s++) exp_pd[p][s] = 0;
    coef_addr = '0; coef_data = '0; rule_addr = '0; rule_wdata = '0;
    thr = M'(400); margin = M'(1200);
    new_rule = '0; new_rule.valid = 1; new_rule.care = 8'hC0; new_rule.match = 8'hC0;
    new_rule.act = 8'hC0;
    rst = 1;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < NSTEP; i++) begin
      en   = ($urandom_range(0, 9) != 0);
      base = 500 - (410 * i) / NSTEP;
      for (int c = 0; c < NC; c++) begin
        off = 0;
        if (i >= 1000 && i < 2000 && c == POS_FRONT) off = 150;       // tilt
        rj = 0;
        if (i >= 3000 && i < 4000 && c == POS_LEFT) rj = 200 + $urandom_range(0, 200); // jammed radar
        sample_en[c]  = en;
        lidar_data[c] = clip(base + off + $urandom_range(0, 40) - 20);
        radar_data[c] = clip(base + off + rj + $urandom_range(0, 40) - 20);
        cond[c]       = FRU_CONDS'($urandom);
        coef_we[c]    = (c == POS_RIGHT && i >= 4500 && i < 4515) ? 2'b11 : 2'b00;
        rule_we[c]    = (c == POS_BACK && i == 2500);
      end
      coef_addr  = 4'(i % 15);
      coef_data  = FIR_Z_BITS'(i % 2);     // every other tap: a gapped window
      rule_addr  = 3'd2;
      rule_wdata = new_rule;
      if (coef_we[POS_RIGHT] != 0) n_coef_writes++;
      if (rule_we[POS_BACK]) n_rule_writes++;
      // pair reference uses the filter outputs visible before this edge
      for (int p = 0; p < 2; p++) begin
        if (mdl[2*p].filt_valid && mdl[2*p+1].filt_valid) begin
          exp_pd[p][0] = ad(mdl[2*p].filt[0], mdl[2*p+1].filt[0]);
          exp_pd[p][1] = ad(mdl[2*p].filt[1], mdl[2*p+1].filt[1]);
          exp_pmm[p]   = {exp_pd[p][1] > margin, exp_pd[p][0] > margin};
        end
      end
      for (int c = 0; c < NC; c++)
        mdl[c].step(en, lidar_data[c], radar_data[c], coef_we[c], coef_addr, coef_data,
                    thr, cond[c], rule_we[c], rule_addr, rule_wdata);
      @(posedge clk); #1;
      if (en) n_samples++; else n_idle++;
      for (int c = 0; c < NC; c++) begin
        check(fv[c] == mdl[c].filt_valid, "filt_valid");
        check(lf[c] == M'(mdl[c].filt[0]) && rf[c] == M'(mdl[c].filt[1]), "filtered outputs");
        check(pmu_done[c] == mdl[c].pmu_done, "pmu frame_done");
        check(pmu_alarm[c] == mdl[c].pmu_alarm && pmu_mean[c] == M'(mdl[c].pmu_mean), "pmu");
        check(act[c] == mdl[c].act && hit[c] == mdl[c].hit, "fru");
        for (int s = 0; s < 2; s++) check(coef_rd[c][s] == FIR_Z_BITS'(mdl[c].coef[s][coef_addr]), "coef_rd");
        if (pmu_alarm[c] && !prev_alarm[c]) n_alarm_raise++;
        if (!pmu_alarm[c] && prev_alarm[c]) n_alarm_clear++;
        prev_alarm[c] = pmu_alarm[c];
        if (hit[c][0]) n_rule0++;
        if (hit[c][1]) n_rule1++;
        if (hit[c][2]) n_rule_new++;
      end
      for (int p = 0; p < 2; p++) begin
        check(pmm[p] == exp_pmm[p], "pair mismatch");
        check(pdelta[p][0] == M'(exp_pd[p][0]) && pdelta[p][1] == M'(exp_pd[p][1]), "pair delta");
        if (pmm[p][0]) n_pair_lidar++;
        if (pmm[p][1]) n_pair_radar++;
      end
    end
    $display("samples=%0d idle=%0d coef_writes=%0d rule_writes=%0d", n_samples, n_idle, n_coef_writes, n_rule_writes);
    $display("pmu alarm raised=%0d cleared=%0d  pair lidar=%0d radar=%0d", n_alarm_raise, n_alarm_clear, n_pair_lidar, n_pair_radar);
    $display("rule0=%0d rule1=%0d programmed rule=%0d", n_rule0, n_rule1, n_rule_new);
    check(n_samples > 0,      "mechanism: filtering");
    check(n_idle > 0,         "mechanism: idle clock (en low)");
    check(n_coef_writes > 0,  "mechanism: coefficient reprogramming");
    check(n_rule_writes > 0,  "mechanism: rule reprogramming");
    check(n_alarm_raise > 0,  "mechanism: PMU alarm raised");
    check(n_alarm_clear > 0,  "mechanism: PMU alarm cleared");
    check(n_pair_lidar > 0,   "mechanism: pair mismatch (lidar)");
    check(n_pair_radar > 0,   "mechanism: pair mismatch (radar)");
    check(n_rule0 > 0,        "mechanism: flight rule 0");
    check(n_rule1 > 0,        "mechanism: flight rule 1");
    check(n_rule_new > 0,     "mechanism: programmed flight rule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
