// tb_model_ensemble: three monitors whose trees have maximum depth 5 (the
// depth used for the three models combined in the ensemble evaluation),
// pruned so that the models finish in different cycles; the total must be
// the sum of the three estimates. Checks are described in tb_top_env.
module tb_model_ensemble;
  int checks, failures;
  bit finished;

  tb_top_env #(.NM(3), .NPER(40), .DEPTH('{5, 5, 5, 5, 5, 5, 5, 5}), .FULL(1'b0)) env (.checks, .failures, .finished);

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge finished) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
