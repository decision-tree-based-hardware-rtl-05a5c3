// tb_ensemble_adder: three models deliver results in random cycles and
// random order (sometimes in the same cycle, sometimes one model twice);
// each total must equal the sum of every model's newest result and appear
// one cycle after the last model delivered.
module tb_ensemble_adder;
  localparam int M = 3, RW = 16, SW = RW + 2;
  logic clk = 0, rst_n = 0;
  logic [M-1:0] done = '0;
  logic [M-1:0][RW-1:0] res = '0;
  logic sum_valid;
  logic [SW-1:0] sum;
  int checks = 0, failures = 0, totals = 0, doubles = 0;

  ensemble_adder #(.NUM_MODELS(M), .RESULT_W(RW), .SUM_W(SW)) dut (
    .clk, .rst_n, .done_i(done), .result_i(res), .sum_valid_o(sum_valid), .sum_o(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned newest [M];
    bit got [M];
    int unsigned exp;
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 300; round++) begin
      foreach (got[i]) got[i] = 0;
      all = 0;
      while (!all) begin
        @(negedge clk);
        // check the previous cycle produced no early total
        checks++;
        if (sum_valid) begin failures++; $display("early total in round %0d", round); end
        for (int i = 0; i < M; i++) begin
          done[i] = ($urandom_range(0, 3) == 0);
          res[i]  = RW'($urandom);
          if (done[i]) begin
            if (got[i]) doubles++;
            got[i] = 1; newest[i] = res[i];
          end
        end
        all = got[0] && got[1] && got[2];
      end
      exp = newest[0] + newest[1] + newest[2];
      @(negedge clk);
      done = '0;
      checks++;
      if (!sum_valid || sum !== SW'(exp)) begin
        failures++; $display("round %0d: valid=%0b sum=%0d expected %0d", round, sum_valid, sum, exp);
      end
      totals++;
    end
    checks++;
    if (doubles == 0) begin failures++; $display("no model delivered twice"); end
    $display("totals=%0d doubles=%0d", totals, doubles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
