// tb_top_env: end-to-end environment for power_mgmt_top, shared by the
// top-level testbenches.
//
// It loads one random tree per model (depth DEPTH[m]) while the design is
// held in reset, then toggles the monitored nets at a random rate that
// changes every period, so that different leaves are reached. An
// independent reference keeps its own period count and rising-edge counts
// per net, walks each tree in software at every period end, and checks:
// each model's Done (2d+1 cycles after Cal_start) and result, the ensemble
// total one cycle after the slowest model, and the phase decision one
// cycle after that. It counts how often each mechanism occurred: period
// restarts, stall-state cycles, leaves at each depth, edges that fall on a
// period boundary, phase increases and decreases, and totals over more
// than one model; a mechanism that never occurs is a failure.
module tb_top_env #(
  parameter int NM     = 1,
  parameter int NPER   = 40,
  parameter int DEPTH [8] = '{default: 8},  // per model, first NM used
  parameter bit FULL   = 1'b0
) (
  output int checks,
  output int failures,
  output bit finished
);
  import tb_tree_pkg::*;
  localparam int NF = dt_pkg::DEF_NUM_FEATURES;
  localparam int PER = dt_pkg::DEF_PERIOD;
  localparam int SEL_W = (NM > 1) ? $clog2(NM) : 1;
  localparam int PWR_W = RESULT_W + $clog2(NM + 1);
  localparam int STATIC_MW = 1000;

  logic clk = 0, rst_n = 0;
  logic [NM-1:0][NF-1:0] sig;
  logic tree_we = 0;
  logic [SEL_W-1:0] tree_sel = 0;
  logic [ADDR_W-1:0] tree_waddr = 0;
  logic [DATA_W-1:0] tree_wdata = 0;
  logic [PWR_W-1:0] static_power = PWR_W'(STATIC_MW);
  logic [NM-1:0] model_done;
  logic [NM-1:0][RESULT_W-1:0] model_result;
  dt_pkg::dt_state_e [NM-1:0] model_state;
  logic power_valid, phase_update;
  logic [PWR_W-1:0] dyn_power;
  logic [2:0] num_phases;
  logic [4:0] phase_en;

  if (NM == 1) begin : g_one
    power_mgmt_top dut (
      .clk, .rst_n, .sig_i(sig), .tree_we_i(tree_we), .tree_sel_i(tree_sel),
      .tree_waddr_i(tree_waddr), .tree_wdata_i(tree_wdata), .static_power_i(static_power),
      .model_done_o(model_done), .model_result_o(model_result), .model_state_o(model_state),
      .power_valid_o(power_valid), .dyn_power_o(dyn_power), .num_phases_o(num_phases),
      .phase_en_o(phase_en), .phase_update_o(phase_update));
  end else begin : g_many
    power_mgmt_top #(.NUM_MODELS(NM)) dut (
      .clk, .rst_n, .sig_i(sig), .tree_we_i(tree_we), .tree_sel_i(tree_sel),
      .tree_waddr_i(tree_waddr), .tree_wdata_i(tree_wdata), .static_power_i(static_power),
      .model_done_o(model_done), .model_result_o(model_result), .model_state_o(model_state),
      .power_valid_o(power_valid), .dyn_power_o(dyn_power), .num_phases_o(num_phases),
      .phase_en_o(phase_en), .phase_update_o(phase_update));
  end

  always #5 clk = ~clk;

  tree_gen t [NM];
  int n_period = 0, n_stall = 0, n_boundary_edge = 0, n_up = 0, n_down = 0, n_totals = 0;
  int depth_seen [9];

  function automatic int ref_phases(int p);
    if (p <= 4500)  return 1;
    if (p <= 8000)  return 2;
    if (p <= 12000) return 3;
    if (p <= 16000) return 4;
    return 5;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  always @(posedge clk)
    if (rst_n) for (int m = 0; m < NM; m++) if (model_state[m] == dt_pkg::ST_S) n_stall++;

  initial begin
    int unsigned acc [NM][NF];
    int unsigned feat [];
    bit s1 [NM][NF];
    int rate [NM][NF];
    int due [NM], exp_res [NM], due_tot, exp_tot, prev_phases, exp_phases, d, c;
    bit pend [NM];
    bit pend_tot, pend_phase;
    checks = 0; failures = 0; finished = 0;
    feat = new[NF];
    sig = '0;
    // build and load the trees with the design in reset
    for (int m = 0; m < NM; m++) begin
      t[m] = new();
      t[m].build(DEPTH[m], NF, PER / 5, 200, 20000 / NM, FULL);
      for (int a = 0; a < int'(t[m].n_nodes); a++) begin
        @(negedge clk);
        tree_we = 1; tree_sel = SEL_W'(m); tree_waddr = ADDR_W'(a); tree_wdata = t[m].mem[a];
      end
    end
    @(negedge clk);
    tree_we = 0;
    for (int m = 0; m < NM; m++) begin
      pend[m] = 0;
      for (int i = 0; i < NF; i++) begin acc[m][i] = 0; s1[m][i] = 0; rate[m][i] = 0; end
    end
    pend_tot = 0; pend_phase = 0; prev_phases = 5; exp_phases = 5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    c = 0;
    while (n_period < NPER) begin
      @(negedge clk);
      c++;
      // ---- check the outputs of this cycle
      for (int m = 0; m < NM; m++) begin
        if (pend[m] && c == due[m]) begin
          checks++;
          if (!model_done[m]) fail($sformatf("model %0d: no Done at cycle %0d", m, c));
          checks++;
          if (model_result[m] !== RESULT_W'(exp_res[m]))
            fail($sformatf("model %0d: result %0d expected %0d", m, model_result[m], exp_res[m]));
          pend[m] = 0;
        end else if (model_done[m]) fail($sformatf("model %0d: unexpected Done at %0d", m, c));
      end
      if (pend_tot && c == due_tot) begin
        checks++;
        if (!power_valid || dyn_power !== PWR_W'(exp_tot))
          fail($sformatf("total %0d valid %0b expected %0d", dyn_power, power_valid, exp_tot));
        pend_tot = 0; pend_phase = 1;
        exp_phases = ref_phases(exp_tot + STATIC_MW);
        if (NM > 1) n_totals++;
      end else if (pend_phase) begin
        checks++;
        if (!phase_update || int'(num_phases) != exp_phases || phase_en != 5'((1 << exp_phases) - 1))
          fail($sformatf("phases %0d expected %0d", num_phases, exp_phases));
        if (exp_phases > prev_phases) n_up++;
        if (exp_phases < prev_phases) n_down++;
        prev_phases = exp_phases;
        pend_phase = 0;
      end else if (power_valid) fail("unexpected power_valid");
      // ---- reference counting for the posedge that ends this cycle; the
      // pulse counted there is (net now) & ~(net one cycle earlier)
      if (c % PER == PER - 1) begin
        // period end: the counts so far are this period's features
        n_period++;
        exp_tot = 0; due_tot = 0;
        for (int m = 0; m < NM; m++) begin
          for (int i = 0; i < NF; i++) begin
            bit pulse;
            pulse = sig[m][i] & ~s1[m][i];
            if (pulse) n_boundary_edge++;
            feat[i] = acc[m][i];
            acc[m][i] = pulse;
          end
          exp_res[m] = t[m].ref_eval(feat, d);
          depth_seen[d]++;
          due[m] = c + 2 + 2 * ((d == 0) ? 1 : d);
          pend[m] = 1;
          exp_tot += exp_res[m];
          if (due[m] > due_tot) due_tot = due[m];
        end
        due_tot++;
        pend_tot = 1;
      end else begin
        for (int m = 0; m < NM; m++)
          for (int i = 0; i < NF; i++) acc[m][i] += (sig[m][i] & ~s1[m][i]);
      end
      for (int m = 0; m < NM; m++)
        for (int i = 0; i < NF; i++) s1[m][i] = sig[m][i];
      if (c % PER == 0)
        for (int m = 0; m < NM; m++)
          for (int i = 0; i < NF; i++) rate[m][i] = $urandom_range(0, 100);
      for (int m = 0; m < NM; m++)
        for (int i = 0; i < NF; i++)
          if ($urandom_range(0, 99) < rate[m][i]) sig[m][i] = ~sig[m][i];
    end
    // every mechanism must have happened at least once
    checks++; if (n_period == 0) fail("no period end");
    checks++; if (n_stall == 0) fail("stall state never entered");
    checks++; if (n_boundary_edge == 0) fail("no edge on a period boundary");
    checks++; if (n_up == 0) fail("phases never added");
    checks++; if (n_down == 0) fail("phases never shed");
    if (NM > 1) begin checks++; if (n_totals == 0) fail("no multi-model total"); end
    begin
      int nd = 0;
      for (int k = 0; k <= 8; k++) if (depth_seen[k] > 0) nd++;
      checks++; if (!FULL && nd < 2) fail("leaves reached at a single depth only");
      $display("periods=%0d stall_cycles=%0d boundary_edges=%0d phase_up=%0d phase_down=%0d totals=%0d leaf_depths=%0d",
               n_period, n_stall, n_boundary_edge, n_up, n_down, n_totals, nd);
    end
    finished = 1;
  end

endmodule
