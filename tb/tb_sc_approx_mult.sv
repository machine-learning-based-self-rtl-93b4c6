// tb_sc_approx_mult: exhaustive test of the self-compensating multiplier.
// For every operand pair: p_apx must equal the reference approximate product,
// p_comp the reference product plus the leaf value, clamped to 0..65535, and
// sat must flag exactly the clamped cases (320 of them, all at zero). The
// error statistics with and without compensation are printed and the mean
// error distance must fall.
module tb_sc_approx_mult;
  import tb_ref_pkg::*;
  import sc_pkg::*;
  logic [7:0]  a, b;
  logic [15:0] p_apx, p_comp;
  comp_t       comp;
  logic        sat;
  int checks = 0, failures = 0;
  int lv[33];
  int exp_p, exp_c, nsat = 0, e0, e1;
  longint sum0 = 0, sum1 = 0;

  sc_approx_mult u_dut (.a, .b, .p_apx, .p_comp, .comp, .sat);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_leaf_values(lv);
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i);
        b = 8'(j);
        #1;
        exp_p = ref_apx(i, j);
        exp_c = ref_clamp(exp_p, lv[ref_leaf(i, j)]);
        checks += 3;
        if (int'(p_apx) != exp_p) failures++;
        if (int'(p_comp) != exp_c) begin
          failures++;
          if (failures < 10) $display("(%0d,%0d): p_comp=%0d expected %0d", i, j, p_comp, exp_c);
        end
        if (sat != (exp_p + lv[ref_leaf(i, j)] != exp_c)) failures++;
        if (sat) nsat++;
        e0 = i * j - exp_p;
        e1 = i * j - int'(p_comp);
        sum0 += (e0 < 0) ? -e0 : e0;
        sum1 += (e1 < 0) ? -e1 : e1;
      end
    checks += 2;
    if (nsat != 320) begin
      failures++;
      $display("clamp count %0d, expected 320", nsat);
    end
    if (sum1 >= sum0) begin
      failures++;
      $display("compensation did not reduce the mean error distance");
    end
    $display("mean ED without %0.1f, with compensation %0.1f", real'(sum0) / 65536.0, real'(sum1) / 65536.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
