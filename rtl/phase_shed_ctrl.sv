// phase_shed_ctrl: look-up-table phase shedding for a multi-phase on-chip
// voltage regulator, driven by the run-time power estimate.
//
// On each power_valid_i the internal-logic power (static_power_i plus the
// monitored dynamic power dyn_power_i, both in mW) is compared with the
// NUM_PHASES-1 ascending thresholds TH_MW; the number of phases to run is
// one plus the number of thresholds the power exceeds. The decision is
// registered: num_phases_o and the thermometer-coded phase_en_o (phases
// 0..k-1 on) change one cycle after power_valid_i, and update_o pulses in
// that cycle. After reset all phases are on. Five phases and the
// table-based selection follow the proof-of-concept regulator; the
// threshold defaults (4.5, 8, 12 and 16 W) are read off the efficiency
// curves of that regulator and should be replaced by the curves of the
// regulator actually used. The code, units and reset state are this
// design's choices. Static power is an input: it is not estimated on chip.
module phase_shed_ctrl #(
  parameter int unsigned NUM_PHASES = dt_pkg::DEF_NUM_PHASES,
  parameter int unsigned PWR_W      = 18,
  parameter logic [NUM_PHASES-2:0][31:0] TH_MW = {32'd16000, 32'd12000, 32'd8000, 32'd4500},
  parameter int unsigned NPH_W      = $clog2(NUM_PHASES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  power_valid_i,
  input  logic [PWR_W-1:0]      dyn_power_i,
  input  logic [PWR_W-1:0]      static_power_i,
  output logic [NPH_W-1:0]      num_phases_o,
  output logic [NUM_PHASES-1:0] phase_en_o,
  output logic                  update_o
);

  logic [PWR_W:0]          total;
  logic [NPH_W-1:0]        nph;
  logic [NUM_PHASES-1:0]   en;

  assign total = {1'b0, dyn_power_i} + {1'b0, static_power_i};

  always_comb begin
    nph = NPH_W'(1);
    for (int k = 0; k < NUM_PHASES - 1; k++)
      if (33'(total) > 33'(TH_MW[k])) nph = nph + 1'b1;
    for (int p = 0; p < NUM_PHASES; p++)
      en[p] = (32'(p) < 32'(nph));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      num_phases_o <= NPH_W'(NUM_PHASES);
      phase_en_o   <= '1;
      update_o     <= 1'b0;
    end else begin
      update_o <= power_valid_i;
      if (power_valid_i) begin
        num_phases_o <= nph;
        phase_en_o   <= en;
      end
    end
  end

endmodule
