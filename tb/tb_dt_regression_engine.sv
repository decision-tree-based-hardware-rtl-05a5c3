// tb_dt_regression_engine: engine with a short period. The testbench plays
// the activity counters (random values each cycle, read back at the reset
// pulse), loads random trees through the load port, and checks every
// period's result against a software walk of the values seen at the reset
// pulse, plus Done timing 2d+1 cycles after Cal_start (Cal_start = the
// cycle after the reset pulse).
module tb_dt_regression_engine;
  import tb_tree_pkg::*;
  localparam int NF = 20, PER = 40;
  logic clk = 0, rst_n = 0;
  logic [NF-1:0][CNT_W-1:0] cnt;
  logic cnt_rst, done, we = 0;
  logic [ADDR_W-1:0] waddr = 0;
  logic [DATA_W-1:0] wdata = 0;
  logic [RESULT_W-1:0] result;
  dt_pkg::dt_state_e state;
  int checks = 0, failures = 0, n_stall = 0;
  tree_gen t;

  dt_regression_engine #(.NUM_FEATURES(NF), .PERIOD(PER)) dut (
    .clk, .rst_n, .act_cnt_i(cnt), .cnt_rst_o(cnt_rst), .tree_we_i(we), .tree_waddr_i(waddr),
    .tree_wdata_i(wdata), .done_o(done), .result_o(result), .state_o(state));

  always #5 clk = ~clk;
  always @(posedge clk) if (state == dt_pkg::ST_S) n_stall++;

  // the counter reset must come every PER cycles
  int since_rst = -1;
  always @(negedge clk) begin
    if (!rst_n) since_rst = -1;
    else if (cnt_rst) begin
      if (since_rst >= 0) begin
        checks++;
        if (since_rst + 1 != PER) begin failures++; $display("period %0d", since_rst + 1); end
      end
      since_rst = 0;
    end else if (since_rst >= 0) since_rst++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tree(tree_gen g);
    for (int a = 0; a < int'(g.n_nodes); a++) begin
      @(negedge clk); we = 1; waddr = ADDR_W'(a); wdata = g.mem[a];
    end
    @(negedge clk); we = 0;
  endtask

  initial begin
    int unsigned feat [];
    int unsigned exp, d, lat;
    feat = new[NF];
    for (int i = 0; i < NF; i++) cnt[i] = '0;
    repeat (3) @(negedge clk);
    for (int tr = 0; tr < 12; tr++) begin
      t = new();
      t.build($urandom_range(1, 8), NF, 60, 0, 60000, tr % 2);
      // load with the engine held in reset, so no walk runs on a partial tree
      rst_n = 0;
      load_tree(t);
      rst_n = 1;
      for (int p = 0; p < 6; p++) begin
        // random counter values every cycle until the period ends
        do begin
          @(negedge clk);
          for (int i = 0; i < NF; i++) cnt[i] = CNT_W'($urandom_range(0, 60));
        end while (!cnt_rst);
        // cnt holds the values snapshotted at this edge
        for (int i = 0; i < NF; i++) feat[i] = cnt[i];
        exp = t.ref_eval(feat, d);
        lat = 0;
        do begin @(negedge clk); lat++; end while (!done && lat < 40);
        checks++;
        if (result !== RESULT_W'(exp)) begin
          failures++; $display("tree %0d period %0d: result %0d expected %0d", tr, p, result, exp);
        end
        checks++;
        // lat counts from the reset cycle: Cal_start is cycle 1
        if (lat - 1 != 2 * d + 1) begin failures++; $display("latency %0d for depth %0d", lat - 1, d); end
      end
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall state seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
