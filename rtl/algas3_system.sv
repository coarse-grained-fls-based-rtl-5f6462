// algas3_system: the complete ALGAS3 landing-guidance processing system.
//
// Four ALGAS3 cores sit at the four corners of the drone's underside, indexed
// by core_pos_e: 0 front, 1 back, 2 left, 3 right. Each core filters and
// checks its own corner's lidar and radar readings. Opposite cores form two
// differential pairs, front/back and left/right, whose filtered readings are
// compared continuously (pair_check); a pair mismatch means that the two sides
// of the drone disagree by more than the preset margin about the distance to
// the landing area.
//
// Interface: per-core arrays of the algas3_core ports, plus pair_margin and
// the pair outputs (index 0 front/back, 1 left/right). The pair check runs on
// clocks where both cores of the pair present a filtered sample, so the cores
// are expected to sample in step; its result follows by one clock.
// The inter-core links (the high-speed differential communication interface)
// and the differential inclination control, sensor interface and fuzzy
// processing units are outside this RTL: their signals are the ports here.
// Four cores in two opposite pairs follow the paper; the rest is this
// design's choice. rst is synchronous, active high.
module algas3_system
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
  input  logic                 sample_en      [N_CORES],
  input  logic [V_BITS-1:0]    lidar_data     [N_CORES],
  input  logic [V_BITS-1:0]    radar_data     [N_CORES],
  input  logic [1:0]           coef_we        [N_CORES],
  input  logic [CA_BITS-1:0]   coef_addr,
  input  logic [Z_BITS-1:0]    coef_data,
  output logic [Z_BITS-1:0]    coef_rd        [N_CORES][2],
  input  logic [M_BITS-1:0]    pmu_threshold,
  output logic [M_BITS-1:0]    pmu_mean       [N_CORES],
  output logic                 pmu_alarm      [N_CORES],
  output logic                 pmu_frame_done [N_CORES],
  output logic [M_BITS-1:0]    lidar_filt     [N_CORES],
  output logic [M_BITS-1:0]    radar_filt     [N_CORES],
  output logic                 filt_valid     [N_CORES],
  input  logic [FRU_CONDS-1:0] fls_cond       [N_CORES],
  input  logic                 rule_we        [N_CORES],
  input  logic [RA_BITS-1:0]   rule_addr,
  input  fru_rule_t            rule_wdata,
  output logic [FRU_ACTS-1:0]  fru_act        [N_CORES],
  output logic [RULES-1:0]     fru_hit        [N_CORES],
  input  logic [M_BITS-1:0]    pair_margin,
  output logic [1:0]           pair_mismatch  [2],
  output logic [M_BITS-1:0]    pair_delta     [2][2]
);

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    algas3_core #(.TAPS(TAPS), .V_BITS(V_BITS), .Z_BITS(Z_BITS), .M_BITS(M_BITS),
                  .RULES(RULES), .CA_BITS(CA_BITS), .RA_BITS(RA_BITS)) u_core (
      .clk            (clk),
      .rst            (rst),
      .sample_en      (sample_en[c]),
      .lidar_data     (lidar_data[c]),
      .radar_data     (radar_data[c]),
      .coef_we        (coef_we[c]),
      .coef_addr      (coef_addr),
      .coef_data      (coef_data),
      .coef_rd        (coef_rd[c]),
      .pmu_threshold  (pmu_threshold),
      .pmu_mean       (pmu_mean[c]),
      .pmu_alarm      (pmu_alarm[c]),
      .pmu_frame_done (pmu_frame_done[c]),
      .lidar_filt     (lidar_filt[c]),
      .radar_filt     (radar_filt[c]),
      .filt_valid     (filt_valid[c]),
      .fls_cond       (fls_cond[c]),
      .rule_we        (rule_we[c]),
      .rule_addr      (rule_addr),
      .rule_wdata     (rule_wdata),
      .fru_act        (fru_act[c]),
      .fru_hit        (fru_hit[c])
    );
  end

  // Differential pairs: 0 = front/back, 1 = left/right.
  for (genvar p = 0; p < 2; p++) begin : g_pair
    localparam int unsigned CA = 2 * p;
    localparam int unsigned CB = 2 * p + 1;
    pair_check #(.D_BITS(M_BITS)) u_pair (
      .clk      (clk),
      .rst      (rst),
      .valid    (filt_valid[CA] & filt_valid[CB]),
      .a_lidar  (lidar_filt[CA]),
      .a_radar  (radar_filt[CA]),
      .b_lidar  (lidar_filt[CB]),
      .b_radar  (radar_filt[CB]),
      .margin   (pair_margin),
      .mismatch (pair_mismatch[p]),
      .delta    (pair_delta[p])
    );
  end

endmodule
