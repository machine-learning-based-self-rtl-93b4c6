// sc_pkg: shared constants and types of the self-compensating approximate
// accelerator.
//
// Operand and product widths, the number of approximate product columns,
// the number of input clusters and the decision-tree leaf table live here.
// The 8-bit operands, the 9 approximate columns and the 16 clusters follow
// the paper. The leaf table is this design's own: the paper prints the tree
// structure but not the leaf values. Leaf k holds the expected (mean) signed
// error, exact product minus approximate product of approx_array_mult, over
// every one of the 65,536 operand pairs whose clusters reach leaf k, rounded
// half up: LEAF_VALUE[k] = floor(sum(err)/count + 1/2). tb_dt_comp_module
// recomputes the table from the multiplier and checks it.
package sc_pkg;

  localparam int unsigned N            = 8;     // operand width
  localparam int unsigned P_W          = 2 * N; // product width
  localparam int unsigned APX_COLS     = 9;     // approximate result columns
  localparam int unsigned NUM_CLUSTERS = 16;    // clusters per input (1..16)
  localparam int unsigned CL_W         = 5;     // holds cluster numbers 1..16
  localparam int unsigned NUM_LEAVES   = 33;    // leaves of the decision tree
  localparam int unsigned LEAF_W       = 6;     // leaf index width
  localparam int unsigned COMP_W       = 10;    // signed compensation width

  typedef logic signed [COMP_W-1:0] comp_t;

  // Compensation mode of an accelerator.
  typedef enum logic {
    MODE_COMPONENT   = 1'b0,  // one compensation module per multiplier
    MODE_ACCELERATOR = 1'b1   // one frame-average compensation per channel
  } comp_mode_e;

  // Leaf values, leaves numbered left to right as drawn.
  localparam comp_t LEAF_VALUE [NUM_LEAVES] = '{
     10'sd108,  -10'sd4, -10'sd116,   10'sd96,   10'sd80,   10'sd56,
      10'sd56,   10'sd40,  -10'sd24,  -10'sd56, -10'sd120, -10'sd152,
      10'sd41,    10'sd0,   10'sd20,   10'sd34,  -10'sd33,  -10'sd16,
     -10'sd33, -10'sd134, -10'sd112, -10'sd176, -10'sd192, -10'sd208,
    -10'sd227,   10'sd41,    10'sd0,  -10'sd15, -10'sd160, -10'sd166,
    -10'sd201, -10'sd192, -10'sd216
  };

  // Cluster of an 8-bit value: 16 equal ranges, numbered 1..16.
  function automatic logic [CL_W-1:0] cluster_of(input logic [N-1:0] x);
    return CL_W'(x / (2 ** N / NUM_CLUSTERS)) + CL_W'(1);
  endfunction

endpackage
