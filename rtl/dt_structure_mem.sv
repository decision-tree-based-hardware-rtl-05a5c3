// dt_structure_mem: block memory that holds one complete decision tree.
//
// Each word is one tree node (layout in dt_pkg): a decision node keeps its
// leaf flag, the unsigned coefficient, the addresses of its left (rule
// true) and right (rule false) children and the address of the feature it
// tests; a leaf keeps its flag and the power value in the low bits. The
// root is at address 0. Because the whole tree shape lives in the memory,
// any tree up to 2^ADDR_W nodes can be loaded, whatever its depth or
// pruning.
//
// Read port: synchronous, rdata_o shows the word at the address presented
// in the previous cycle (block RAM behaviour). Write port: synchronous, used
// to load the tree before or between estimations. The field layout follows
// the monitor's memory format; the load port is this design's addition.
module dt_structure_mem #(
  parameter int unsigned ADDR_W = dt_pkg::DEF_ADDR_W,
  parameter int unsigned DATA_W = dt_pkg::node_width(dt_pkg::DEF_CNT_W, dt_pkg::DEF_ADDR_W,
                                                     $clog2(dt_pkg::DEF_NUM_FEATURES))
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] raddr_i,
  output logic [DATA_W-1:0] rdata_o,
  input  logic              we_i,
  input  logic [ADDR_W-1:0] waddr_i,
  input  logic [DATA_W-1:0] wdata_i
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    rdata_o <= mem[raddr_i];
  end

endmodule
