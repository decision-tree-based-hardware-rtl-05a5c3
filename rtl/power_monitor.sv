// power_monitor: the complete hardware wrapper for one power model - one
// activity counter per monitored net plus the decision tree regression
// engine.
//
// sig_i carries the NUM_FEATURES nets chosen by feature selection. Their
// rising edges are counted over each PERIOD-cycle estimation period; at the
// end of a period the counts become the features of the decision tree, and
// within 2n+1 cycles (n = tree depth) done_o pulses with the estimated
// dynamic power of the period just ended on result_o (the unit is whatever
// the loaded tree's leaves hold; mW in this design's examples). The first
// estimate after reset covers a full period. The tree is loaded through
// the tree_* port. Structure as in the monitor's description.
module power_monitor #(
  parameter int unsigned NUM_FEATURES = dt_pkg::DEF_NUM_FEATURES,
  parameter int unsigned CNT_W        = dt_pkg::DEF_CNT_W,
  parameter int unsigned PERIOD       = dt_pkg::DEF_PERIOD,
  parameter int unsigned ADDR_W       = dt_pkg::DEF_ADDR_W,
  parameter int unsigned RESULT_W     = dt_pkg::DEF_RESULT_W,
  parameter int unsigned FEAT_W       = (NUM_FEATURES > 1) ? $clog2(NUM_FEATURES) : 1,
  parameter int unsigned DATA_W       = dt_pkg::node_width(CNT_W, ADDR_W, FEAT_W)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NUM_FEATURES-1:0] sig_i,
  input  logic                    tree_we_i,
  input  logic [ADDR_W-1:0]       tree_waddr_i,
  input  logic [DATA_W-1:0]       tree_wdata_i,
  output logic                    done_o,
  output logic [RESULT_W-1:0]     result_o,
  output dt_pkg::dt_state_e       state_o
);

  logic [NUM_FEATURES-1:0][CNT_W-1:0] act_cnt;
  logic                               cnt_rst;

  for (genvar i = 0; i < NUM_FEATURES; i++) begin : g_cnt
    activity_counter #(.CNT_W(CNT_W)) u_cnt (
      .clk, .rst_n,
      .sig_i  (sig_i[i]),
      .clr_i  (cnt_rst),
      .count_o(act_cnt[i])
    );
  end

  dt_regression_engine #(
    .NUM_FEATURES(NUM_FEATURES), .CNT_W(CNT_W), .PERIOD(PERIOD), .ADDR_W(ADDR_W),
    .RESULT_W(RESULT_W), .FEAT_W(FEAT_W), .DATA_W(DATA_W)
  ) u_engine (
    .clk, .rst_n,
    .act_cnt_i   (act_cnt),
    .cnt_rst_o   (cnt_rst),
    .tree_we_i, .tree_waddr_i, .tree_wdata_i,
    .done_o, .result_o, .state_o
  );

endmodule
