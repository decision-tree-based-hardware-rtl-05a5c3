// activity_counter: number of rising edges of one monitored net in the
// current estimation period (one feature of the power model).
//
// A pos_edge_detector turns each rising edge into a one-cycle enable for a
// CNT_W-bit up counter built from ordinary logic (the LUT-based counter;
// the DSP-slice variant is a vendor primitive with the same behaviour).
// clr_i, driven by the feature controller in the last cycle of each period,
// restarts the count. If an edge pulse coincides with clr_i the counter
// loads 1, so no edge is lost across the period boundary (this design's
// choice). The width should exceed log2 of the period in cycles; 20 bits
// covers periods of up to 2^21 cycles because at most one rising edge
// occurs every two cycles. The counter wraps; simulation flags a wrap.
module activity_counter #(
  parameter int unsigned CNT_W = dt_pkg::DEF_CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sig_i,
  input  logic             clr_i,
  output logic [CNT_W-1:0] count_o
);

  logic en;

  pos_edge_detector u_edge (
    .clk    (clk),
    .rst_n  (rst_n),
    .sig_i  (sig_i),
    .pulse_o(en)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)      count_o <= '0;
    else if (clr_i)  count_o <= CNT_W'(en);
    else if (en)     count_o <= count_o + 1'b1;
  end

  // The width must cover the highest activity of a period.
  a_no_wrap: assert property (@(posedge clk) disable iff (!rst_n)
                              !(en && !clr_i && (&count_o)));

endmodule
