// mult_cell: one adder cell of the approximate array multiplier.
//
// With APPROX = 1 the cell is an approximate mirror adder 5 (AMA5): all adder
// logic is removed, the sum output copies input b and the carry output copies
// input a, and the carry input is ignored. With APPROX = 0 it is an exact full
// adder. approx_array_mult uses APPROX = 1 in the result columns the paper
// approximates and APPROX = 0 elsewhere. The paper names the AMA5 cell; its
// Sum = B, Cout = A behaviour is the published AMA5 definition.
// APPROX defaults to the exact cell; the multiplier sets it per position.
// Purely combinational, no clock.
module mult_cell #(
  parameter bit APPROX = 1'b0
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  always_comb begin
    if (APPROX) begin
      sum  = b;
      cout = a;
    end else begin
      sum  = a ^ b ^ cin;
      cout = (a & b) | (cin & (a ^ b));
    end
  end
endmodule
