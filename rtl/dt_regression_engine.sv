// dt_regression_engine: the decision tree regression engine of the power
// monitor - feature controller, decision tree FSM and structure memory.
//
// Once per estimation period the feature controller snapshots the activity
// counters, restarts them (cnt_rst_o) and pulses Cal_start; the FSM then
// walks the tree held in the structure memory, asking the feature
// controller for one feature per tree level through Act_sel/Act_value, and
// raises done_o with the leaf value on result_o. A tree of depth n finishes
// 2n+1 cycles after Cal_start, far inside a period of hundreds of cycles,
// so one walk is done per period. The tree is loaded through the tree_*
// write port (root at address 0). The partition into three subsystems and
// their signals follow the monitor's description; the load port is this
// design's addition.
module dt_regression_engine #(
  parameter int unsigned NUM_FEATURES = dt_pkg::DEF_NUM_FEATURES,
  parameter int unsigned CNT_W        = dt_pkg::DEF_CNT_W,
  parameter int unsigned PERIOD       = dt_pkg::DEF_PERIOD,
  parameter int unsigned ADDR_W       = dt_pkg::DEF_ADDR_W,
  parameter int unsigned RESULT_W     = dt_pkg::DEF_RESULT_W,
  parameter int unsigned FEAT_W       = (NUM_FEATURES > 1) ? $clog2(NUM_FEATURES) : 1,
  parameter int unsigned DATA_W       = dt_pkg::node_width(CNT_W, ADDR_W, FEAT_W)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NUM_FEATURES-1:0][CNT_W-1:0] act_cnt_i,
  output logic                               cnt_rst_o,
  input  logic                               tree_we_i,
  input  logic [ADDR_W-1:0]                  tree_waddr_i,
  input  logic [DATA_W-1:0]                  tree_wdata_i,
  output logic                               done_o,
  output logic [RESULT_W-1:0]                result_o,
  output dt_pkg::dt_state_e                  state_o
);

  logic [FEAT_W-1:0] act_sel;
  logic [CNT_W-1:0]  act_value;
  logic              cal_start;
  logic [ADDR_W-1:0] mem_addr;
  logic [DATA_W-1:0] mem_rdata;

  feature_controller #(
    .NUM_FEATURES(NUM_FEATURES), .CNT_W(CNT_W), .PERIOD(PERIOD), .FEAT_W(FEAT_W)
  ) u_fc (
    .clk, .rst_n,
    .act_cnt_i  (act_cnt_i),
    .act_sel_i  (act_sel),
    .act_value_o(act_value),
    .cal_start_o(cal_start),
    .cnt_rst_o  (cnt_rst_o)
  );

  dt_fsm #(
    .CNT_W(CNT_W), .ADDR_W(ADDR_W), .FEAT_W(FEAT_W), .RESULT_W(RESULT_W), .DATA_W(DATA_W)
  ) u_fsm (
    .clk, .rst_n,
    .cal_start_i(cal_start),
    .act_value_i(act_value),
    .act_sel_o  (act_sel),
    .mem_addr_o (mem_addr),
    .mem_rdata_i(mem_rdata),
    .done_o     (done_o),
    .result_o   (result_o),
    .state_o    (state_o)
  );

  dt_structure_mem #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_mem (
    .clk,
    .raddr_i(mem_addr),
    .rdata_o(mem_rdata),
    .we_i   (tree_we_i),
    .waddr_i(tree_waddr_i),
    .wdata_i(tree_wdata_i)
  );

endmodule
