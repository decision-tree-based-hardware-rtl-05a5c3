// tb_tree_pkg: random decision trees and a software reference walk for the
// monitor testbenches.
//
// A tree_gen object builds a random binary tree in a word array laid out as
// the structure memory expects (root at address 0, children placed in the
// order they are created), with node widths of the default configuration.
// ref_eval() walks it in software with the rule feature <= coeff -> left,
// returning the leaf value and the depth of the leaf reached; the expected
// hardware latency for that leaf is 2*depth+1 cycles after Cal_start.
package tb_tree_pkg;

  localparam int unsigned CNT_W    = dt_pkg::DEF_CNT_W;
  localparam int unsigned ADDR_W   = dt_pkg::DEF_ADDR_W;
  localparam int unsigned FEAT_W   = $clog2(dt_pkg::DEF_NUM_FEATURES);
  localparam int unsigned RESULT_W = dt_pkg::DEF_RESULT_W;
  localparam int unsigned DATA_W   = dt_pkg::node_width(CNT_W, ADDR_W, FEAT_W);
  localparam int unsigned WORDS    = 2 ** ADDR_W;

  typedef logic [DATA_W-1:0] word_t;

  function automatic word_t enc_node(int unsigned coeff, int unsigned left, int unsigned right,
                                     int unsigned act);
    word_t w;
    w = '0;
    w[DATA_W-1]                          = 1'b0;
    w[DATA_W-2 -: CNT_W]                 = CNT_W'(coeff);
    w[2*ADDR_W+FEAT_W-1 -: ADDR_W]       = ADDR_W'(left);
    w[ADDR_W+FEAT_W-1 -: ADDR_W]         = ADDR_W'(right);
    w[FEAT_W-1:0]                        = FEAT_W'(act);
    return w;
  endfunction

  function automatic word_t enc_leaf(int unsigned result);
    word_t w;
    w = '0;
    w[DATA_W-1]      = 1'b1;
    w[RESULT_W-1:0]  = RESULT_W'(result);
    return w;
  endfunction

  class tree_gen;
    word_t       mem [WORDS];
    int unsigned coeff [WORDS];
    int unsigned left [WORDS];
    int unsigned right [WORDS];
    int unsigned act [WORDS];
    int unsigned value [WORDS];
    bit          leaf [WORDS];
    int unsigned n_nodes;
    int unsigned max_depth;
    int unsigned nfeat;
    int unsigned coeff_max;
    int unsigned val_lo, val_hi;
    bit          full;

    // depth: maximum depth; full: every path reaches that depth.
    function void build(int unsigned depth, int unsigned nf, int unsigned cmax,
                        int unsigned vlo, int unsigned vhi, bit f);
      max_depth = depth; nfeat = nf; coeff_max = cmax; val_lo = vlo; val_hi = vhi; full = f;
      n_nodes = 1;
      grow(0, 0);
    endfunction

    function automatic void grow(int unsigned a, int unsigned d);
      bit make_leaf;
      make_leaf = (d == max_depth) || (!full && d > 0 && ($urandom_range(0, 3) == 0));
      leaf[a] = make_leaf;
      if (make_leaf) begin
        value[a] = $urandom_range(val_lo, val_hi);
        mem[a]   = enc_leaf(value[a]);
      end else begin
        int unsigned l, r;
        l = n_nodes; r = n_nodes + 1; n_nodes += 2;
        coeff[a] = $urandom_range(0, coeff_max);
        act[a]   = $urandom_range(0, nfeat - 1);
        left[a]  = l; right[a] = r;
        mem[a]   = enc_node(coeff[a], l, r, act[a]);
        grow(l, d + 1);
        grow(r, d + 1);
      end
    endfunction

    // Software walk: returns the leaf value; depth_o = edges from the root.
    function automatic int unsigned ref_eval(int unsigned feat [], output int unsigned depth_o);
      int unsigned a = 0;
      depth_o = 0;
      while (!leaf[a]) begin
        a = (feat[act[a]] <= coeff[a]) ? left[a] : right[a];
        depth_o++;
      end
      return value[a];
    endfunction
  endclass

endpackage
