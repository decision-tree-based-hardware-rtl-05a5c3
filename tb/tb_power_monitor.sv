// tb_power_monitor: one hardware wrapper with a 60-cycle period and random
// pruned trees of depth 1 to 8. The nets toggle at random rates; the
// testbench counts their rising edges itself (its own period count from
// reset), walks the tree in software at each period end and checks result
// and Done timing (2d+1 cycles after Cal_start).
module tb_power_monitor;
  import tb_tree_pkg::*;
  localparam int NF = 20, PER = 60;
  logic clk = 0, rst_n = 0;
  logic [NF-1:0] sig = '0;
  logic we = 0, done;
  logic [ADDR_W-1:0] waddr = 0;
  logic [DATA_W-1:0] wdata = 0;
  logic [RESULT_W-1:0] result;
  dt_pkg::dt_state_e state;
  int checks = 0, failures = 0;
  tree_gen t;

  power_monitor #(.NUM_FEATURES(NF), .PERIOD(PER)) dut (
    .clk, .rst_n, .sig_i(sig), .tree_we_i(we), .tree_waddr_i(waddr), .tree_wdata_i(wdata),
    .done_o(done), .result_o(result), .state_o(state));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned acc [NF], feat [];
    bit s1 [NF];
    int rate [NF];
    int c, due, exp, d;
    bit pend;
    feat = new[NF];
    for (int tr = 0; tr < 10; tr++) begin
      rst_n = 0;
      t = new();
      t.build($urandom_range(1, 8), NF, PER / 6, 0, 60000, 1'b0);
      for (int a = 0; a < int'(t.n_nodes); a++) begin
        @(negedge clk); we = 1; waddr = ADDR_W'(a); wdata = t.mem[a];
      end
      @(negedge clk); we = 0; sig = '0;
      @(negedge clk);
      foreach (acc[i]) begin acc[i] = 0; s1[i] = 0; rate[i] = 0; end
      rst_n = 1; c = 0; pend = 0;
      while (c < 20 * PER) begin
        @(negedge clk);
        c++;
        if (pend && c == due) begin
          checks += 2;
          if (!done) begin failures++; $display("no Done at %0d", c); end
          if (result !== RESULT_W'(exp)) begin failures++; $display("result %0d expected %0d", result, exp); end
          pend = 0;
        end else if (done) begin failures++; $display("unexpected Done at %0d", c); end
        if (c % PER == PER - 1) begin
          for (int i = 0; i < NF; i++) begin feat[i] = acc[i]; acc[i] = sig[i] & ~s1[i]; end
          exp = t.ref_eval(feat, d);
          due = c + 2 + 2 * d; pend = 1;
        end else
          for (int i = 0; i < NF; i++) acc[i] += (sig[i] & ~s1[i]);
        for (int i = 0; i < NF; i++) s1[i] = sig[i];
        if (c % PER == 0) foreach (rate[i]) rate[i] = $urandom_range(0, 100);
        for (int i = 0; i < NF; i++) if ($urandom_range(0, 99) < rate[i]) sig[i] = ~sig[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
