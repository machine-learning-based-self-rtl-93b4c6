// exact_adder: the exact adder of the accelerator, summing the two products
// (AB + CD in the paper's accelerator figure). The result has one extra bit
// so it never overflows; the width is this design's choice.
// Combinational.
module exact_adder #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic [W:0]   s
);
  assign s = {1'b0, x} + {1'b0, y};
endmodule
