// dt_fsm: walks the decision tree stored in dt_structure_mem and outputs the
// leaf value as the power estimate.
//
// Four states: idle (I), node reading (N), stalling (S) and result
// outputting (R), with the transitions I->N, N->S, S->N, S->R and R->I.
//   I  The root address 0 is kept on the memory, so the root word and,
//      through Act_sel, the root's feature are already registered when
//      cal_start_i arrives.
//   N  The node word and its feature value are valid. The rule
//      feature <= coefficient (unsigned) is evaluated; true selects the
//      left child, false the right child, whose address is sent to the
//      memory at once.
//   S  Stall for the memory read: the child word arrives and its feature
//      address goes out on act_sel_o, to be registered by the feature
//      controller. If the child is a leaf its value is latched and the FSM
//      moves to R, otherwise back to N.
//   R  done_o is high for one cycle with result_o valid (result_o holds its
//      value until the next leaf).
// For a leaf at depth n, done_o rises 2n+1 cycles after the cycle in which
// cal_start_i is high (n N/S pairs, then R); this meets the 2n+1-cycle bound
// of the monitor. A root that is itself a leaf takes N, S, R. A cal_start_i
// outside I is ignored. The state set, the rule and the field meanings
// follow the monitor's description; the cycle-by-cycle split of work
// between N and S and the root prefetch are this design's choices.
module dt_fsm #(
  parameter int unsigned CNT_W    = dt_pkg::DEF_CNT_W,
  parameter int unsigned ADDR_W   = dt_pkg::DEF_ADDR_W,
  parameter int unsigned FEAT_W   = $clog2(dt_pkg::DEF_NUM_FEATURES),
  parameter int unsigned RESULT_W = dt_pkg::DEF_RESULT_W,
  parameter int unsigned DATA_W   = dt_pkg::node_width(CNT_W, ADDR_W, FEAT_W)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cal_start_i,
  input  logic [CNT_W-1:0]    act_value_i,
  output logic [FEAT_W-1:0]   act_sel_o,
  output logic [ADDR_W-1:0]   mem_addr_o,
  input  logic [DATA_W-1:0]   mem_rdata_i,
  output logic                done_o,
  output logic [RESULT_W-1:0] result_o,
  output dt_pkg::dt_state_e   state_o
);
  import dt_pkg::*;

  // Decoded view of a structure memory word.
  typedef struct packed {
    logic              is_leaf;
    logic [CNT_W-1:0]  coeff;
    logic [ADDR_W-1:0] left;
    logic [ADDR_W-1:0] right;
    logic [FEAT_W-1:0] act;
  } node_t;

  node_t             node;
  dt_state_e         state, state_nxt;
  logic [ADDR_W-1:0] addr_q, next_addr;
  logic              rule_true;

  assign node      = node_t'(mem_rdata_i);
  assign rule_true = (act_value_i <= node.coeff);
  assign next_addr = node.is_leaf ? addr_q : (rule_true ? node.left : node.right);
  assign act_sel_o = node.act;
  assign done_o    = (state == ST_R);
  assign state_o   = state;

  always_comb begin
    unique case (state)
      ST_I:    mem_addr_o = '0;
      ST_N:    mem_addr_o = next_addr;
      ST_S:    mem_addr_o = addr_q;
      default: mem_addr_o = '0;         // ST_R: prefetch the root again
    endcase
  end

  always_comb begin
    state_nxt = state;
    unique case (state)
      ST_I:    if (cal_start_i) state_nxt = ST_N;
      ST_N:    state_nxt = ST_S;
      ST_S:    state_nxt = node.is_leaf ? ST_R : ST_N;
      default: state_nxt = ST_I;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= ST_I;
      addr_q   <= '0;
      result_o <= '0;
    end else begin
      state <= state_nxt;
      unique case (state)
        ST_N:    addr_q <= next_addr;
        ST_S:    if (node.is_leaf) result_o <= node[RESULT_W-1:0];
        ST_R:    addr_q <= '0;
        default: ;
      endcase
    end
  end

  // The estimation period must leave time for a full walk.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 cal_start_i |-> state == ST_I);

  initial begin
    assert (RESULT_W <= 2 * ADDR_W + FEAT_W + CNT_W)
      else $error("leaf result does not fit the node word");
  end

endmodule
