// pos_edge_detector: one-cycle pulse on every rising edge of a monitored net.
//
// Two flip-flops in series sample the signal; the pulse is high while the
// first holds 1 and the second still holds 0, i.e. for exactly one clock
// cycle after the signal has gone from 0 to 1. The pulse acts as the count
// enable of an activity counter. The two-register structure follows the
// monitor's edge detector; the synchronous active-low reset is this
// design's choice. The monitored net must be synchronous to clk.
//
// Timing: a 0->1 change seen at clock edge k raises pulse_o in the cycle
// after edge k (one cycle of latency), for one cycle.
module pos_edge_detector (
  input  logic clk,
  input  logic rst_n,
  input  logic sig_i,
  output logic pulse_o
);

  logic q1, q2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q1 <= 1'b0;
      q2 <= 1'b0;
    end else begin
      q1 <= sig_i;
      q2 <= q1;
    end
  end

  assign pulse_o = q1 & ~q2;

endmodule
