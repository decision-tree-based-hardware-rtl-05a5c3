// tb_feature_controller: random counter values every cycle; checks the
// period (Rst every PERIOD cycles, Cal_start one cycle later), that the
// buffered features are the counter values of the Rst cycle, and the
// one-cycle Act_sel -> Act_value latency, including out-of-range selects.
module tb_feature_controller;
  localparam int NF = 20, CW = 20, PER = 37, FW = 5;
  logic clk = 0, rst_n = 0;
  logic [NF-1:0][CW-1:0] cnt;
  logic [FW-1:0] sel;
  logic [CW-1:0] val;
  logic cal_start, cnt_rst;
  logic [NF-1:0][CW-1:0] snap;
  int checks = 0, failures = 0, cyc = 0, last_rst = -1, periods = 0;

  feature_controller #(.NUM_FEATURES(NF), .CNT_W(CW), .PERIOD(PER)) dut (
    .clk, .rst_n, .act_cnt_i(cnt), .act_sel_i(sel), .act_value_o(val),
    .cal_start_o(cal_start), .cnt_rst_o(cnt_rst));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev_rst = 0, have_snap = 0;
    sel = 0;
    for (int i = 0; i < NF; i++) cnt[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (periods < 40) begin
      @(negedge clk);
      cyc++;
      // Cal_start must follow Rst by exactly one cycle
      checks++;
      if (cal_start !== prev_rst) begin failures++; $display("cal_start mismatch at %0d", cyc); end
      // Act_value shows the buffered feature selected one cycle earlier
      if (have_snap && !prev_rst) begin
        checks++;
        if (val !== ((sel < NF) ? snap[sel] : '0)) begin
          failures++; $display("act_value=%0d sel=%0d", val, sel);
        end
      end
      // new stimulus for the next edge
      for (int i = 0; i < NF; i++) cnt[i] = CW'($urandom);
      sel = FW'($urandom_range(0, 31));
      if (cnt_rst) begin
        if (last_rst >= 0) begin
          checks++;
          if (cyc - last_rst != PER) begin failures++; $display("period %0d", cyc - last_rst); end
        end
        last_rst = cyc; periods++;
        snap = cnt; have_snap = 1;
      end
      prev_rst = cnt_rst;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
