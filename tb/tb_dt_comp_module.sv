// tb_dt_comp_module: exhaustive test of the decision-tree compensation module.
// For every operand pair the reached leaf is compared with a walk of the tree
// held as a flat node table, and the compensation value with the leaf value
// recomputed here from the reference multiplier (mean signed error of the
// leaf, rounded half up). It also checks that every one of the 33 leaves is
// reached and prints the error statistics after compensation.
module tb_dt_comp_module;
  import tb_ref_pkg::*;
  import sc_pkg::*;
  logic [7:0] in1, in2;
  logic [5:0] leaf;
  comp_t      comp;
  int checks = 0, failures = 0;
  int lv[33];
  int hits[33];
  int e, exact_cnt = 0, max_ed = 0;
  longint sum_ed = 0;

  dt_comp_module u_dut (.in1, .in2, .leaf, .comp);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_leaf_values(lv);
    for (int k = 0; k < 33; k++) hits[k] = 0;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        in1 = 8'(i);
        in2 = 8'(j);
        #1;
        checks += 2;
        if (int'(leaf) != ref_leaf(i, j)) begin
          failures++;
          if (failures < 10) $display("leaf mismatch (%0d,%0d): got %0d ref %0d", i, j, leaf, ref_leaf(i, j));
        end else hits[leaf]++;
        if (int'(comp) != lv[ref_leaf(i, j)]) begin
          failures++;
          if (failures < 10) $display("value mismatch (%0d,%0d): got %0d ref %0d", i, j, comp, lv[ref_leaf(i, j)]);
        end
        e = i * j - ref_apx(i, j) - int'(comp);
        if (e < 0) e = -e;
        if (e == 0) exact_cnt++;
        if (e > max_ed) max_ed = e;
        sum_ed += e;
      end
    for (int k = 0; k < 33; k++) begin
      checks++;
      if (hits[k] == 0) begin
        failures++;
        $display("leaf %0d never reached", k);
      end
    end
    $display("after compensation (unclamped): exact=%0d maxED=%0d meanED=%0.1f",
             exact_cnt, max_ed, real'(sum_ed) / 65536.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
