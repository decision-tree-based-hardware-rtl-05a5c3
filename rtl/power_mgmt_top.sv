// power_mgmt_top: run-time dynamic power monitoring with phase shedding.
//
// NUM_MODELS hardware power monitors (each: activity counters on its
// NUM_FEATURES monitored nets and a memory-based decision tree engine)
// estimate the dynamic power of their part of the design once per
// PERIOD-cycle estimation period. The ensemble adder sums the estimates of
// all models into the total dynamic power (dyn_power_o, power_valid_o),
// which, together with the static power supplied on static_power_i, drives
// the look-up-table phase shedding of the on-chip regulator
// (num_phases_o / phase_en_o). With the default single model the total is
// that model's estimate.
//
// Trees are loaded through tree_we_i / tree_sel_i (model) / tree_waddr_i /
// tree_wdata_i before the monitors are used. All models share one clock and
// reset, so their periods are aligned; the total appears one cycle after
// the slowest model's done, the phase decision one cycle later.
module power_mgmt_top #(
  parameter int unsigned NUM_MODELS   = 1,
  parameter int unsigned NUM_FEATURES = dt_pkg::DEF_NUM_FEATURES,
  parameter int unsigned CNT_W        = dt_pkg::DEF_CNT_W,
  parameter int unsigned PERIOD       = dt_pkg::DEF_PERIOD,
  parameter int unsigned ADDR_W       = dt_pkg::DEF_ADDR_W,
  parameter int unsigned RESULT_W     = dt_pkg::DEF_RESULT_W,
  parameter int unsigned NUM_PHASES   = dt_pkg::DEF_NUM_PHASES,
  parameter int unsigned FEAT_W       = (NUM_FEATURES > 1) ? $clog2(NUM_FEATURES) : 1,
  parameter int unsigned DATA_W       = dt_pkg::node_width(CNT_W, ADDR_W, FEAT_W),
  parameter int unsigned SEL_W        = (NUM_MODELS > 1) ? $clog2(NUM_MODELS) : 1,
  parameter int unsigned PWR_W        = RESULT_W + $clog2(NUM_MODELS + 1),
  parameter int unsigned NPH_W        = $clog2(NUM_PHASES + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [NUM_MODELS-1:0][NUM_FEATURES-1:0] sig_i,
  input  logic                                  tree_we_i,
  input  logic [SEL_W-1:0]                      tree_sel_i,
  input  logic [ADDR_W-1:0]                     tree_waddr_i,
  input  logic [DATA_W-1:0]                     tree_wdata_i,
  input  logic [PWR_W-1:0]                      static_power_i,
  output logic [NUM_MODELS-1:0]                 model_done_o,
  output logic [NUM_MODELS-1:0][RESULT_W-1:0]   model_result_o,
  output dt_pkg::dt_state_e [NUM_MODELS-1:0]    model_state_o,
  output logic                                  power_valid_o,
  output logic [PWR_W-1:0]                      dyn_power_o,
  output logic [NPH_W-1:0]                      num_phases_o,
  output logic [NUM_PHASES-1:0]                 phase_en_o,
  output logic                                  phase_update_o
);

  for (genvar m = 0; m < NUM_MODELS; m++) begin : g_model
    power_monitor #(
      .NUM_FEATURES(NUM_FEATURES), .CNT_W(CNT_W), .PERIOD(PERIOD), .ADDR_W(ADDR_W),
      .RESULT_W(RESULT_W), .FEAT_W(FEAT_W), .DATA_W(DATA_W)
    ) u_mon (
      .clk, .rst_n,
      .sig_i       (sig_i[m]),
      .tree_we_i   (tree_we_i && (32'(tree_sel_i) == m)),
      .tree_waddr_i(tree_waddr_i),
      .tree_wdata_i(tree_wdata_i),
      .done_o      (model_done_o[m]),
      .result_o    (model_result_o[m]),
      .state_o     (model_state_o[m])
    );
  end

  ensemble_adder #(.NUM_MODELS(NUM_MODELS), .RESULT_W(RESULT_W), .SUM_W(PWR_W)) u_ens (
    .clk, .rst_n,
    .done_i     (model_done_o),
    .result_i   (model_result_o),
    .sum_valid_o(power_valid_o),
    .sum_o      (dyn_power_o)
  );

  phase_shed_ctrl #(.NUM_PHASES(NUM_PHASES), .PWR_W(PWR_W), .NPH_W(NPH_W)) u_shed (
    .clk, .rst_n,
    .power_valid_i (power_valid_o),
    .dyn_power_i   (dyn_power_o),
    .static_power_i(static_power_i),
    .num_phases_o  (num_phases_o),
    .phase_en_o    (phase_en_o),
    .update_o      (phase_update_o)
  );

endmodule
