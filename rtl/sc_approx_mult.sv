// sc_approx_mult: self-compensating approximate multiplier (component level).
//
// The approximate array multiplier and the decision-tree compensation module
// see the same two operands in parallel; the predicted signed compensation
// is then added to the approximate product, as in the paper's
// "compensation module per approximate component" configuration. The sum is
// clamped to the unsigned product range 0..2^16-1 and 'sat' flags a clamp;
// the paper does not discuss overflow, the clamp is this design's choice.
// The raw approximate product is also brought out so that an accelerator can
// apply a frame-level compensation instead.
// Purely combinational.
module sc_approx_mult
  import sc_pkg::*;
(
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [P_W-1:0] p_apx,
  output logic [P_W-1:0] p_comp,
  output comp_t          comp,
  output logic           sat
);
  logic [LEAF_W-1:0] leaf;

  approx_array_mult u_mult (
    .a(a),
    .b(b),
    .p(p_apx)
  );

  dt_comp_module u_dt (
    .in1 (a),
    .in2 (b),
    .leaf(leaf),
    .comp(comp)
  );

  comp_adder u_add (
    .p  (p_apx),
    .c  (comp),
    .y  (p_comp),
    .sat(sat)
  );

  logic [LEAF_W-1:0] unused_leaf;
  assign unused_leaf = leaf;
endmodule
