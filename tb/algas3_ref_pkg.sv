// algas3_ref_pkg: clock-by-clock reference model of one ALGAS3 core, used by
// the core and system testbenches.
//
// core_ref mirrors the visible behaviour of algas3_core: two transposed-form
// FIR chains (kept exact across coefficient changes), the registered filter
// outputs and valid flag, the 16-sample PMU frame statistics and the Flight
// Rules Unit table. Call step() once per rising clock edge with the values the
// core samples on that edge; the expected outputs after the edge are then in
// the public fields.
package algas3_ref_pkg;
  import algas3_pkg::*;

  class core_ref;
    int unsigned taps;
    int unsigned mmask;                  // 2^M - 1
    int unsigned coef  [2][FIR_TAPS];
    int unsigned delay [2][FIR_TAPS];
    // outputs after the last step
    int unsigned filt  [2];
    bit          filt_valid;
    int unsigned pmu_mean;
    bit          pmu_alarm, pmu_done;
    fru_rule_t   rules [FRU_RULES];
    logic [FRU_ACTS-1:0]  act;
    logic [FRU_RULES-1:0] hit;
    // PMU state
    int unsigned cnt, acc;

    function new();
      taps  = FIR_TAPS;
      mmask = (1 << FIR_M_BITS) - 1;
      reset();
    endfunction

    function void reset();
      for (int s = 0; s < 2; s++)
        for (int k = 0; k < FIR_TAPS; k++) begin coef[s][k] = 1; delay[s][k] = 0; end
      filt[0] = 0; filt[1] = 0; filt_valid = 0;
      pmu_mean = 0; pmu_alarm = 0; pmu_done = 0; cnt = 0; acc = 0;
      foreach (rules[i]) rules[i] = '0;
      rules[0].valid = 1; rules[0].care = 8'h07; rules[0].match = 8'h06; rules[0].act = 8'h03;
      rules[1].valid = 1; rules[1].care = 8'h39; rules[1].match = 8'h39; rules[1].act = 8'h3C;
      act = '0; hit = '0;
    endfunction

    // One rising clock edge (rst low).
    function void step(bit en, int unsigned lidar, int unsigned radar,
                       bit [1:0] coef_we, int unsigned coef_addr, int unsigned coef_data,
                       int unsigned threshold, logic [FRU_CONDS-1:0] cond,
                       bit rule_we, int unsigned rule_addr, fru_rule_t rule_wdata);
      int unsigned x [2];
      int unsigned sums [2][FIR_TAPS+1];
      int unsigned d, m;
      logic [FRU_RULES-1:0] h;
      logic [FRU_ACTS-1:0] a;
      // PMU consumes the filter outputs visible before this edge
      pmu_done = 0;
      if (filt_valid) begin
        d = (filt[0] >= filt[1]) ? filt[0] - filt[1] : filt[1] - filt[0];
        if (cnt == PMU_FRAME - 1) begin
          m = (acc + d) >> PMU_FRAME_LOG2;
          pmu_mean = m; pmu_alarm = (m > threshold); pmu_done = 1; acc = 0;
        end else acc += d;
        cnt = (cnt + 1) % PMU_FRAME;
      end
      // FIR chains: combinational sums use the coefficients before the edge
      x[0] = lidar; x[1] = radar;
      for (int s = 0; s < 2; s++) begin
        sums[s][FIR_TAPS] = 0;
        for (int k = FIR_TAPS - 1; k >= 0; k--)
          sums[s][k] = (delay[s][k] + coef[s][k] * x[s]) & mmask;
        if (en) begin
          for (int k = 0; k < FIR_TAPS; k++) delay[s][k] = sums[s][k+1];
          filt[s] = sums[s][0];
        end
      end
      filt_valid = en;
      for (int s = 0; s < 2; s++)
        if (coef_we[s] && coef_addr < FIR_TAPS) coef[s][coef_addr] = coef_data;
      // FRU
      h = '0; a = '0;
      for (int i = 0; i < FRU_RULES; i++) begin
        h[i] = rules[i].valid && ((cond & rules[i].care) == (rules[i].match & rules[i].care));
        if (h[i]) a |= rules[i].act;
      end
      hit = h; act = a;
      if (rule_we) rules[rule_addr] = rule_wdata;
    endfunction
  endclass

endpackage
