// comp_adder: adds a signed compensation value to an unsigned product and
// clamps the result to the product range 0..2^P_W-1; 'sat' is high when the
// clamp acted. Used wherever a compensation is applied. Combinational.
module comp_adder
  import sc_pkg::*;
(
  input  logic [P_W-1:0] p,
  input  comp_t          c,
  output logic [P_W-1:0] y,
  output logic           sat
);
  logic signed [P_W+1:0] t;

  always_comb begin
    t   = $signed({2'b00, p}) + (P_W+2)'(c);
    sat = 1'b0;
    y   = t[P_W-1:0];
    if (t < 0) begin
      y   = '0;
      sat = 1'b1;
    end else if (t[P_W]) begin
      y   = '1;
      sat = 1'b1;
    end
  end
endmodule
