// tb_sc_axacc: one colour accelerator in both compensation modes.
// Component mode: random pixel pairs; each product must equal the reference
// approximate product plus its own leaf value (clamped) and the sum must be
// their exact sum, one clock after the beat. Accelerator mode: a frame is
// accumulated, the frame compensation is computed, and then every product of
// the second pass must be the reference approximate product plus that single
// frame value (clamped). Clamps are counted and must occur.
module tb_sc_axacc;
  import tb_ref_pkg::*;
  import sc_pkg::*;
  localparam int MAXP = 512;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic [7:0]   px1 [2], px2 [2];
  logic         out_en = 1'b0, use_frame = 1'b0, acc_en = 1'b0, clear = 1'b0, start_avg = 1'b0;
  logic         avg_done, out_valid;
  comp_t        frame_comp;
  logic [15:0]  prod [2];
  logic [16:0]  sum;
  logic [1:0]   sat;
  int checks = 0, failures = 0, clamps = 0;
  int lv[33];

  sc_axacc #(.MAX_PIXELS(MAXP)) u_dut (
    .clk, .rst_n, .px1, .px2, .out_en, .use_frame, .acc_en, .clear, .start_avg,
    .avg_done, .frame_comp, .out_valid, .prod, .sum, .sat
  );

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%0t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  // Drive one beat with out_en and check the registered result.
  task automatic beat_and_check(int a0, int b0, int a1, int b1, bit frame, int fcomp);
    int e0, e1;
    @(negedge clk);
    px1[0] = 8'(a0); px2[0] = 8'(b0);
    px1[1] = 8'(a1); px2[1] = 8'(b1);
    out_en = 1'b1;
    use_frame = frame;
    e0 = ref_clamp(ref_apx(a0, b0), frame ? fcomp : lv[ref_leaf(a0, b0)]);
    e1 = ref_clamp(ref_apx(a1, b1), frame ? fcomp : lv[ref_leaf(a1, b1)]);
    @(negedge clk);
    out_en = 1'b0;
    check("out_valid", int'(out_valid), 1);
    check("prod0", int'(prod[0]), e0);
    check("prod1", int'(prod[1]), e1);
    check("sum", int'(sum), e0 + e1);
    clamps += int'(sat[0]) + int'(sat[1]);
  endtask

  initial begin
    int s1, s2, n, a0, b0, a1, b1, fcomp;
    ref_leaf_values(lv);
    px1 = '{default: '0};
    px2 = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // component mode, including a clamping pair (0 * 255)
    beat_and_check(0, 255, 3, 250, 1'b0, 0);
    for (int k = 0; k < 300; k++)
      beat_and_check(int'($urandom_range(255)), int'($urandom_range(255)),
                     int'($urandom_range(255)), int'($urandom_range(255)), 1'b0, 0);
    // accelerator mode: measure a frame of dark image-1 pixels, bright image-2
    for (int f = 0; f < 3; f++) begin
      s1 = 0; s2 = 0; n = 0;
      for (int k = 0; k < 100; k++) begin
        @(negedge clk);
        acc_en = 1'b1;
        for (int l = 0; l < 2; l++) begin
          px1[l] = 8'($urandom_range(20 + 80 * f));
          px2[l] = 8'(255 - $urandom_range(30));
          s1 += int'(px1[l]);
          s2 += int'(px2[l]);
          n++;
        end
        start_avg = (k == 99);
      end
      @(negedge clk);
      acc_en = 1'b0;
      start_avg = 1'b0;
      while (!avg_done) @(negedge clk);
      @(negedge clk);
      fcomp = lv[ref_leaf(s1 / n, s2 / n)];
      check("frame_comp", int'(frame_comp), fcomp);
      for (int k = 0; k < 100; k++) begin
        a0 = int'($urandom_range(20 + 80 * f)); b0 = 255 - int'($urandom_range(30));
        a1 = int'($urandom_range(20 + 80 * f)); b1 = 255 - int'($urandom_range(30));
        beat_and_check(a0, b0, a1, b1, 1'b1, fcomp);
      end
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
    end
    checks++;
    if (clamps == 0) begin
      failures++;
      $display("no clamp observed");
    end
    $display("clamps observed: %0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
