// tb_phase_shed_ctrl: random and boundary power values; the number of
// phases must follow the table 1 | 4500 | 2 | 8000 | 3 | 12000 | 4 | 16000
// | 5 (mW, a value equal to a boundary stays in the lower range), with a
// thermometer phase enable, updated one cycle after power_valid and held
// otherwise; reset state is all five phases on.
module tb_phase_shed_ctrl;
  localparam int PW = 18;
  logic clk = 0, rst_n = 0, valid = 0, upd;
  logic [PW-1:0] dyn = 0, stat = 0;
  logic [2:0] nph;
  logic [4:0] en;
  int checks = 0, failures = 0;

  phase_shed_ctrl #(.PWR_W(PW)) dut (
    .clk, .rst_n, .power_valid_i(valid), .dyn_power_i(dyn), .static_power_i(stat),
    .num_phases_o(nph), .phase_en_o(en), .update_o(upd));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_phases(int p);
    if (p <= 4500)  return 1;
    if (p <= 8000)  return 2;
    if (p <= 12000) return 3;
    if (p <= 16000) return 4;
    return 5;
  endfunction

  initial begin
    int exp, last, total;
    int bnd [8] = '{4500, 4501, 8000, 8001, 12000, 12001, 16000, 16001};
    repeat (3) @(negedge clk);
    checks++;
    if (nph != 5 || en != 5'b11111) begin failures++; $display("reset state"); end
    rst_n = 1;
    last = 5;
    for (int k = 0; k < 2000; k++) begin
      valid = ($urandom_range(0, 2) == 0);
      stat  = PW'($urandom_range(0, 3000));
      total = (k < 8) ? bnd[k] : $urandom_range(0, 24000);
      if (k < 8) valid = 1;
      dyn   = PW'(total - int'(stat) < 0 ? 0 : total - int'(stat));
      total = int'(dyn) + int'(stat);
      @(negedge clk);
      if (valid) last = ref_phases(total);
      exp = last;
      checks++;
      if (int'(nph) != exp || en != 5'((1 << exp) - 1) || upd !== valid) begin
        failures++; $display("k=%0d power %0d: nph=%0d en=%b upd=%0b expected %0d", k, total, nph, en, upd, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
