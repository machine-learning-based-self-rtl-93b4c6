// tb_mult_cell: exhaustive check of the multiplier cell in both settings.
// APPROX=1 must behave as AMA5 (sum = b, cout = a); APPROX=0 as an exact full
// adder (a + b + cin = 2*cout + sum).
module tb_mult_cell;
  logic a, b, cin;
  logic s_ax, c_ax, s_ex, c_ex;
  int checks = 0, failures = 0;

  mult_cell #(.APPROX(1'b1)) u_ax (.a, .b, .cin, .sum(s_ax), .cout(c_ax));
  mult_cell #(.APPROX(1'b0)) u_ex (.a, .b, .cin, .sum(s_ex), .cout(c_ex));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks += 2;
      if (s_ax !== b || c_ax !== a) begin
        failures++;
        $display("AMA5 mismatch a=%0d b=%0d cin=%0d -> s=%0d c=%0d", a, b, cin, s_ax, c_ax);
      end
      if (2 * int'(c_ex) + int'(s_ex) != int'(a) + int'(b) + int'(cin)) begin
        failures++;
        $display("FA mismatch a=%0d b=%0d cin=%0d -> s=%0d c=%0d", a, b, cin, s_ex, c_ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
