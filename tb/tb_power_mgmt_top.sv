// tb_power_mgmt_top: the whole design at its default parameters (one model,
// 20 monitored nets, 300-cycle period, 20-bit counters, structure memory for
// depth 8) running 60 estimation periods with a pruned random tree of
// depth 8. Checks and counted mechanisms are described in tb_top_env.
module tb_power_mgmt_top;
  int checks, failures;
  bit finished;

  tb_top_env #(.NM(1), .NPER(60), .DEPTH('{8, 8, 8, 8, 8, 8, 8, 8}), .FULL(1'b0)) env (.checks, .failures, .finished);

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
