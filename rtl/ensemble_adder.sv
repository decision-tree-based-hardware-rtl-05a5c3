// ensemble_adder: combines the estimates of separately trained power models
// into one total, the model ensemble.
//
// Each model's result is latched when its done_i bit pulses. When every
// model has delivered at least once since the last total, sum_o is loaded
// with the sum of the latched results and sum_valid_o pulses for one cycle
// (one cycle after the last done_i). Models share the period length but
// their trees differ in depth, so their done pulses may fall in different
// cycles; a model that delivers twice before the others keeps only its
// newest value. Adding the per-model estimates is the ensemble rule of the
// monitor; the gathering of done pulses is this design's choice.
module ensemble_adder #(
  parameter int unsigned NUM_MODELS = 1,
  parameter int unsigned RESULT_W   = dt_pkg::DEF_RESULT_W,
  parameter int unsigned SUM_W      = RESULT_W + $clog2(NUM_MODELS + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [NUM_MODELS-1:0]               done_i,
  input  logic [NUM_MODELS-1:0][RESULT_W-1:0] result_i,
  output logic                                sum_valid_o,
  output logic [SUM_W-1:0]                    sum_o
);

  logic [NUM_MODELS-1:0]               got_q, got_nxt;
  logic [NUM_MODELS-1:0][RESULT_W-1:0] res_q, res_nxt;
  logic [SUM_W-1:0]                    sum_nxt;

  always_comb begin
    got_nxt = got_q | done_i;
    sum_nxt = '0;
    for (int i = 0; i < NUM_MODELS; i++) begin
      res_nxt[i] = done_i[i] ? result_i[i] : res_q[i];
      sum_nxt    = sum_nxt + SUM_W'(res_nxt[i]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      got_q       <= '0;
      res_q       <= '0;
      sum_valid_o <= 1'b0;
      sum_o       <= '0;
    end else begin
      res_q <= res_nxt;
      if (&got_nxt) begin
        got_q       <= '0;
        sum_valid_o <= 1'b1;
        sum_o       <= sum_nxt;
      end else begin
        got_q       <= got_nxt;
        sum_valid_o <= 1'b0;
      end
    end
  end

endmodule
