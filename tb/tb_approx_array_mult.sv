// tb_approx_array_mult: exhaustive test of the 8x8 approximate multiplier.
// Every one of the 65,536 operand pairs is compared with the loop-based
// reference model, and the error statistics over all pairs (exact results,
// maximum and total error distance, number of distinct error distances) are
// compared with values computed independently for this array. The paper's
// own figures for its multiplier are printed alongside for comparison.
module tb_approx_array_mult;
  import tb_ref_pkg::*;
  logic [7:0]  a, b;
  logic [15:0] p;
  int checks = 0, failures = 0;
  int exact_cnt = 0, max_ed = 0, ed, gt500 = 0, gt400 = 0, gt300 = 0, distinct = 0;
  longint sum_ed = 0;
  bit seen [int];

  approx_array_mult u_dut (.a, .b, .p);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i);
        b = 8'(j);
        #1;
        checks++;
        if (int'(p) != ref_apx(i, j)) begin
          failures++;
          if (failures < 10) $display("mismatch %0d*%0d: got %0d ref %0d", i, j, p, ref_apx(i, j));
        end
        ed = i * j - int'(p);
        if (ed < 0) ed = -ed;
        if (ed == 0) exact_cnt++;
        else if (!seen.exists(ed)) begin
          seen[ed] = 1'b1;
          distinct++;
        end
        if (ed > max_ed) max_ed = ed;
        if (ed > 500) gt500++;
        if (ed > 400) gt400++;
        if (ed > 300) gt300++;
        sum_ed += ed;
      end
    expect_eq("exact results", exact_cnt, 1688);
    expect_eq("max ED", max_ed, 796);
    expect_eq("total ED", sum_ed, 64'd12075088);
    expect_eq("distinct ED", distinct, 172);
    expect_eq("ED>500", gt500, 1556);
    $display("this array: exact=%0d maxED=%0d meanED=%0.1f distinct=%0d ED>500/400/300=%0d/%0d/%0d",
             exact_cnt, max_ed, real'(sum_ed) / 65536.0, distinct, gt500, gt400, gt300);
    $display("paper:      exact=3116 maxED=756 meanED=185 distinct=176 ED>500/400/300=1575/5454/12922");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
