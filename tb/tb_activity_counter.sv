// tb_activity_counter: toggles the monitored net with random spacing,
// counts the rising edges it produced, and checks the counter against that
// number; also checks the period clear, including an edge that coincides
// with the clear (it must count as 1 in the new period).
module tb_activity_counter;
  localparam int CNT_W = 20;
  logic clk = 0, rst_n = 0, sig = 0, clr = 0;
  logic [CNT_W-1:0] count;
  int checks = 0, failures = 0;

  activity_counter #(.CNT_W(CNT_W)) dut (.clk, .rst_n, .sig_i(sig), .clr_i(clr), .count_o(count));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int exp, string what);
    checks++;
    if (count !== CNT_W'(exp)) begin
      failures++;
      $display("%s: count=%0d expected %0d", what, count, exp);
    end
  endtask

  // one rising edge: low for lo cycles, high for hi cycles
  task automatic pulse_sig(int lo, int hi);
    repeat (lo) @(negedge clk);
    sig = 1;
    repeat (hi) @(negedge clk);
    sig = 0;
  endtask

  initial begin
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(0, "after reset");
    for (int burst = 0; burst < 30; burst++) begin
      n = $urandom_range(0, 120);
      for (int i = 0; i < n; i++) pulse_sig($urandom_range(1, 3), $urandom_range(1, 3));
      repeat (3) @(negedge clk);
      check(n, "burst");
      // clear while quiet
      clr = 1; @(negedge clk); clr = 0;
      check(0, "after clear");
    end
    // an edge whose pulse coincides with the clear is counted in the new period
    sig = 1;                 // sampled at next posedge -> pulse in the cycle after
    @(negedge clk);
    clr = 1;                 // clear in the pulse cycle
    @(negedge clk);
    clr = 0; sig = 0;
    check(1, "edge during clear");
    repeat (3) @(negedge clk);
    check(1, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
