// tb_pos_edge_detector: drives a random bit stream and checks that the
// detector pulses exactly in the cycle after each sampled 0->1 change.
module tb_pos_edge_detector;
  logic clk = 0, rst_n = 0, sig = 0, pulse;
  int checks = 0, failures = 0, edges = 0;
  bit s_prev = 0, s_prev2 = 0;

  pos_edge_detector dut (.clk, .rst_n, .sig_i(sig), .pulse_o(pulse));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      // pulse visible now reflects the two most recent sampled values
      checks++;
      if (pulse !== (s_prev & ~s_prev2)) begin
        failures++;
        $display("cycle %0d: pulse=%0b expected %0b", k, pulse, s_prev & ~s_prev2);
      end
      if (s_prev & ~s_prev2) edges++;
      sig = ($urandom_range(0, 2) != 0) ? ~sig : sig;
      @(posedge clk);
      s_prev2 = s_prev;
      s_prev  = sig;
    end
    checks++;
    if (edges < 50) begin failures++; $display("too few edges exercised: %0d", edges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
