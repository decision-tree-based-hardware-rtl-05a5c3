// tb_dt_fsm: the FSM alone, with a behavioural synchronous-read memory and a
// registered feature multiplexer around it. Random trees of depth 0 to 8
// (full and pruned) are walked with random feature vectors; each result is
// compared with a software walk, and Done must come exactly 2d+1 cycles
// after Cal_start for a leaf at depth d (d >= 1), never later than 2n+1 for
// a tree of depth n. The states entered are counted.
module tb_dt_fsm;
  import tb_tree_pkg::*;
  localparam int NF = 20;
  logic clk = 0, rst_n = 0, cal_start = 0, done;
  logic [CNT_W-1:0]    act_value;
  logic [FEAT_W-1:0]   act_sel;
  logic [ADDR_W-1:0]   mem_addr;
  logic [DATA_W-1:0]   mem_rdata;
  logic [RESULT_W-1:0] result;
  dt_pkg::dt_state_e   state;
  int unsigned feat [];
  int checks = 0, failures = 0;
  int n_state [4];
  tree_gen t;

  dt_fsm dut (.clk, .rst_n, .cal_start_i(cal_start), .act_value_i(act_value),
              .act_sel_o(act_sel), .mem_addr_o(mem_addr), .mem_rdata_i(mem_rdata),
              .done_o(done), .result_o(result), .state_o(state));

  always #5 clk = ~clk;

  // memory and feature register models
  always_ff @(posedge clk) begin
    mem_rdata <= t.mem[mem_addr];
    act_value <= (act_sel < NF) ? CNT_W'(feat[act_sel]) : '0;
  end
  always @(posedge clk) if (rst_n) n_state[state]++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp, d, lat;
    t = new();
    feat = new[NF];
    foreach (feat[i]) feat[i] = 0;
    t.build(3, NF, 100, 0, 60000, 1'b1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int tr = 0; tr < 60; tr++) begin
      int unsigned depth;
      depth = (tr < 5) ? 0 : $urandom_range(1, 8);
      t = new();
      t.build(depth, NF, 100, 0, 60000, tr % 2);
      repeat (3) @(negedge clk);            // root prefetch after a tree change
      for (int v = 0; v < 20; v++) begin
        foreach (feat[i]) feat[i] = $urandom_range(0, 100);
        @(negedge clk);                      // features settle in the register
        exp = t.ref_eval(feat, d);
        cal_start = 1;
        @(negedge clk);
        cal_start = 0;
        lat = 1;
        while (!done && lat < 40) begin @(negedge clk); lat++; end
        checks++;
        if (result !== RESULT_W'(exp)) begin
          failures++; $display("tree %0d depth %0d: result %0d expected %0d", tr, depth, result, exp);
        end
        checks++;
        if (lat != ((d == 0) ? 3 : 2 * d + 1)) begin
          failures++; $display("tree %0d leaf depth %0d: latency %0d", tr, d, lat);
        end
        checks++;
        if (depth > 0 && lat > 2 * depth + 1) begin failures++; $display("over 2n+1"); end
        @(negedge clk);
        checks++;
        if (done || state != dt_pkg::ST_I) begin failures++; $display("not back to idle"); end
      end
    end
    // cal_start while busy is ignored by design; every state must have been used
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (n_state[s] == 0) begin failures++; $display("state %0d never entered", s); end
    end
    $display("states I=%0d N=%0d S=%0d R=%0d", n_state[0], n_state[1], n_state[2], n_state[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
