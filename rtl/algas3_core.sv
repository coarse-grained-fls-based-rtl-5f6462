// algas3_core: one ALGAS3 processing core, serving one corner of the drone.
//
// The core takes the distance samples of its corner's two sensors, an 840 nm
// lidar and a 24 GHz radar, each delivered by a sensor interface unit. Each
// stream is cleaned by its own 15-tap systolic moving-average FIR filter. The
// two filtered streams go (a) out to the fuzzy-logic localized processing
// node, which fuses them into actuator commands and is not part of this RTL,
// and (b) to the Prognostic Malfunction Unit, whose alarm goes out towards the
// Differential Inclination Control unit. The Flight Rules Unit evaluates its
// rule table on condition bits that the fuzzy node supplies and returns the
// fired actions to it.
//
// Interface: both sensors are sampled together, one pair per clock while
// sample_en = 1 (the two sensor interfaces are assumed to be synchronised).
// Filtered outputs appear one clock after a sample pair with filt_valid = 1.
// PMU results follow the 16th filtered pair of a frame by one clock; FRU
// outputs follow fls_cond by one clock. rst is synchronous, active high.
// Index 0 of coef_we / coef_rd is the lidar filter, index 1 the radar filter.
// The block split follows the paper's corner diagram; shared sampling and the
// programming ports are this design's choices.
module algas3_core
  import algas3_pkg::*;
#(
  parameter int unsigned TAPS    = FIR_TAPS,
  parameter int unsigned V_BITS  = FIR_V_BITS,
  parameter int unsigned Z_BITS  = FIR_Z_BITS,
  parameter int unsigned M_BITS  = FIR_M_BITS,
  parameter int unsigned RULES   = FRU_RULES,
  parameter int unsigned CA_BITS = (TAPS > 1) ? $clog2(TAPS) : 1,
  parameter int unsigned RA_BITS = (RULES > 1) ? $clog2(RULES) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  // from the two sensor interface units
  input  logic                 sample_en,
  input  logic [V_BITS-1:0]    lidar_data,
  input  logic [V_BITS-1:0]    radar_data,
  // filter coefficient programming
  input  logic [1:0]           coef_we,
  input  logic [CA_BITS-1:0]   coef_addr,
  input  logic [Z_BITS-1:0]    coef_data,
  output logic [Z_BITS-1:0]    coef_rd [2],
  // PMU configuration and results (towards the DIC unit)
  input  logic [M_BITS-1:0]    pmu_threshold,
  output logic [M_BITS-1:0]    pmu_mean,
  output logic                 pmu_alarm,
  output logic                 pmu_frame_done,
  // filtered readings (towards the fuzzy processing node)
  output logic [M_BITS-1:0]    lidar_filt,
  output logic [M_BITS-1:0]    radar_filt,
  output logic                 filt_valid,
  // Flight Rules Unit (conditions from, actions to, the fuzzy processing node)
  input  logic [FRU_CONDS-1:0] fls_cond,
  input  logic                 rule_we,
  input  logic [RA_BITS-1:0]   rule_addr,
  input  fru_rule_t            rule_wdata,
  output logic [FRU_ACTS-1:0]  fru_act,
  output logic [RULES-1:0]     fru_hit
);

  logic lidar_valid, radar_valid;

  systolic_fir #(.TAPS(TAPS), .V_BITS(V_BITS), .Z_BITS(Z_BITS),
                 .M_BITS(M_BITS), .A_BITS(CA_BITS)) u_fir_lidar (
    .clk        (clk),
    .rst        (rst),
    .en         (sample_en),
    .data_in    (lidar_data),
    .coef_we    (coef_we[0]),
    .coef_addr  (coef_addr),
    .coef_data  (coef_data),
    .coef_rd    (coef_rd[0]),
    .data_out   (lidar_filt),
    .data_valid (lidar_valid)
  );

  systolic_fir #(.TAPS(TAPS), .V_BITS(V_BITS), .Z_BITS(Z_BITS),
                 .M_BITS(M_BITS), .A_BITS(CA_BITS)) u_fir_radar (
    .clk        (clk),
    .rst        (rst),
    .en         (sample_en),
    .data_in    (radar_data),
    .coef_we    (coef_we[1]),
    .coef_addr  (coef_addr),
    .coef_data  (coef_data),
    .coef_rd    (coef_rd[1]),
    .data_out   (radar_filt),
    .data_valid (radar_valid)
  );

  always_comb filt_valid = lidar_valid & radar_valid;

  pmu #(.D_BITS(M_BITS)) u_pmu (
    .clk        (clk),
    .rst        (rst),
    .valid      (filt_valid),
    .a          (lidar_filt),
    .b          (radar_filt),
    .threshold  (pmu_threshold),
    .mean_diff  (pmu_mean),
    .alarm      (pmu_alarm),
    .frame_done (pmu_frame_done)
  );

  fru #(.RULES(RULES), .A_BITS(RA_BITS)) u_fru (
    .clk        (clk),
    .rst        (rst),
    .cond       (fls_cond),
    .rule_we    (rule_we),
    .rule_addr  (rule_addr),
    .rule_wdata (rule_wdata),
    .act        (fru_act),
    .hit        (fru_hit)
  );

endmodule
