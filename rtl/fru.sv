// fru: Flight Rules Unit.
//
// A configurable table of RULES flight rules of the form
//     IF (cond & care) == (match & care) THEN assert act
// over FRU_CONDS condition bits (crisp truth values of fuzzy qualifiers such as
// "Landing-Mode" or "Optical-Sensor is Very Noisy", supplied by the fuzzy
// processing node) and FRU_ACTS action bits ("reduce speed", "enter hover
// mode", "signal sensor error", ...). Every clock all rules are evaluated in
// parallel; hit shows which rules fired and act is the OR of their actions.
// Both are registered: they reflect cond of the previous clock.
//
// Rules are rewritten one at a time through rule_we/rule_addr/rule_wdata. On
// reset (synchronous, active high) slot 0 and slot 1 hold the two example rules
// of the paper and the other slots are empty:
//   0: IF NOT landing AND beacon weak AND moving away from beacon
//      THEN reduce speed, signal range-limit error
//   1: IF landing AND optical, uWave and UWB sensors all very noisy
//      THEN stop landing, enter hover, signal sensor error, enable manual control
// The paper states what the FRU does and gives these rules; the table
// encoding, its size and the write port are this design's choices.
module fru
  import algas3_pkg::*;
#(
  parameter int unsigned RULES  = FRU_RULES,
  parameter int unsigned A_BITS = (RULES > 1) ? $clog2(RULES) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [FRU_CONDS-1:0] cond,
  input  logic                 rule_we,
  input  logic [A_BITS-1:0]    rule_addr,
  input  fru_rule_t            rule_wdata,
  output logic [FRU_ACTS-1:0]  act,
  output logic [RULES-1:0]     hit
);

  fru_rule_t rules [RULES];
  logic [RULES-1:0]    hit_next;
  logic [FRU_ACTS-1:0] act_next;

  function automatic fru_rule_t default_rule(int unsigned idx);
    fru_rule_t r;
    r = '0;
    if (idx == 0) begin
      r.valid = 1'b1;
      r.care[C_LANDING_MODE]     = 1'b1;   // match bit stays 0: NOT landing
      r.care[C_BEACON_WEAK]      = 1'b1;
      r.match[C_BEACON_WEAK]     = 1'b1;
      r.care[C_AWAY_FROM_BEACON] = 1'b1;
      r.match[C_AWAY_FROM_BEACON]= 1'b1;
      r.act[A_REDUCE_SPEED]      = 1'b1;
      r.act[A_RANGE_LIMIT_ERROR] = 1'b1;
    end else if (idx == 1) begin
      r.valid = 1'b1;
      r.care[C_LANDING_MODE]   = 1'b1;
      r.match[C_LANDING_MODE]  = 1'b1;
      r.care[C_OPTICAL_NOISY]  = 1'b1;
      r.match[C_OPTICAL_NOISY] = 1'b1;
      r.care[C_UWAVE_NOISY]    = 1'b1;
      r.match[C_UWAVE_NOISY]   = 1'b1;
      r.care[C_UWB_NOISY]      = 1'b1;
      r.match[C_UWB_NOISY]     = 1'b1;
      r.act[A_STOP_LANDING]    = 1'b1;
      r.act[A_ENTER_HOVER]     = 1'b1;
      r.act[A_SENSOR_ERROR]    = 1'b1;
      r.act[A_MANUAL_CONTROL]  = 1'b1;
    end
    return r;
  endfunction

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < RULES; i++) begin
      if (rst)                                  rules[i] <= default_rule(i);
      else if (rule_we && rule_addr == A_BITS'(i)) rules[i] <= rule_wdata;
    end
  end

  always_comb begin
    act_next = '0;
    for (int unsigned i = 0; i < RULES; i++) begin
      hit_next[i] = rules[i].valid &&
                    (((cond ^ rules[i].match) & rules[i].care) == '0);
      if (hit_next[i]) act_next |= rules[i].act;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      act <= '0;
      hit <= '0;
    end else begin
      act <= act_next;
      hit <= hit_next;
    end
  end

endmodule
