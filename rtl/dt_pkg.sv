// dt_pkg: shared sizes and types of the decision-tree power monitor.
//
// The defaults follow the evaluated configuration: 20-bit activity counters,
// up to 20 monitored signals per model, a 300-cycle estimation period
// (3 us at 10 ns) and a structure memory large enough for a complete tree of
// depth 8, the deepest tree of the hyper-parameter search. The result width
// (16 bits, 1 LSB = 1 mW) and the memory word layout widths are this
// design's own choices.
//
// Structure memory word, most significant field first:
//   decision node : is_leaf=0 | coeff[CNT_W] | left[ADDR_W] | right[ADDR_W] | act[FEAT_W]
//   leaf node     : is_leaf=1 | unused                        | result[RESULT_W] (low bits)
// The word width is 1 + CNT_W + 2*ADDR_W + FEAT_W (44 bits by default).
package dt_pkg;

  localparam int unsigned DEF_CNT_W        = 20;   // activity counter width
  localparam int unsigned DEF_NUM_FEATURES = 20;   // monitored signals per model
  localparam int unsigned DEF_PERIOD       = 300;  // estimation period, cycles
  localparam int unsigned DEF_MAX_DEPTH    = 8;    // deepest tree the memory holds
  localparam int unsigned DEF_ADDR_W       = DEF_MAX_DEPTH + 1; // 2^(d+1) words
  localparam int unsigned DEF_RESULT_W     = 16;   // power estimate, mW
  localparam int unsigned DEF_NUM_PHASES   = 5;    // regulator phases

  // Width of a structure memory word for the given field widths.
  function automatic int unsigned node_width(int unsigned cnt_w, int unsigned addr_w,
                                             int unsigned feat_w);
    return 1 + cnt_w + 2 * addr_w + feat_w;
  endfunction

  // Decision tree FSM states: idle, node reading, stalling, result outputting.
  typedef enum logic [1:0] {
    ST_I = 2'd0,
    ST_N = 2'd1,
    ST_S = 2'd2,
    ST_R = 2'd3
  } dt_state_e;

endpackage
