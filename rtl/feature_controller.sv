// feature_controller: period timing and feature buffering for the decision
// tree engine.
//
// A clock counter divides time into estimation periods of PERIOD cycles.
// In the last cycle of each period (clock counter = PERIOD-1) the values of
// all activity counters are copied into a bank of buffer registers and the
// counters are told to restart (cnt_rst_o, combinational decode of the
// clock counter, so the snapshot and the restart happen at the same edge and
// every cycle belongs to exactly one period). One cycle later cal_start_o
// pulses to start the tree FSM, which then reads the buffered features
// through the Act_sel multiplexer; the selected value is registered and
// appears on act_value_o one cycle after act_sel_i.
//
// The clock counter, the select-and-register path and the reset of the
// counters follow the monitor's feature controller. Buffering all features
// in front of the multiplexer (so that the next period can count while the
// tree is evaluated) and the exact cycle of each pulse are this design's
// choices.
module feature_controller #(
  parameter int unsigned NUM_FEATURES = dt_pkg::DEF_NUM_FEATURES,
  parameter int unsigned CNT_W        = dt_pkg::DEF_CNT_W,
  parameter int unsigned PERIOD       = dt_pkg::DEF_PERIOD,
  parameter int unsigned FEAT_W       = (NUM_FEATURES > 1) ? $clog2(NUM_FEATURES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NUM_FEATURES-1:0][CNT_W-1:0] act_cnt_i,
  input  logic [FEAT_W-1:0]             act_sel_i,
  output logic [CNT_W-1:0]              act_value_o,
  output logic                          cal_start_o,
  output logic                          cnt_rst_o
);

  localparam int unsigned PCNT_W = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [PCNT_W-1:0]                    clk_cnt;
  logic [NUM_FEATURES-1:0][CNT_W-1:0]   feat_buf;
  logic                                 period_end;

  assign period_end = (clk_cnt == PCNT_W'(PERIOD - 1));
  assign cnt_rst_o  = period_end;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clk_cnt     <= '0;
      cal_start_o <= 1'b0;
      feat_buf    <= '0;
    end else begin
      clk_cnt     <= period_end ? '0 : clk_cnt + 1'b1;
      cal_start_o <= period_end;
      if (period_end) feat_buf <= act_cnt_i;
    end
  end

  // Select & register: an out-of-range address reads as zero.
  always_ff @(posedge clk) begin
    if (!rst_n)                                  act_value_o <= '0;
    else if (32'(act_sel_i) < NUM_FEATURES)      act_value_o <= feat_buf[act_sel_i];
    else                                         act_value_o <= '0;
  end

  initial begin
    assert (PERIOD >= 2) else $error("PERIOD must be at least 2 cycles");
  end

endmodule
