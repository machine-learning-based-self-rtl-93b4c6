// tb_frame_comp_unit: frame-average compensation checked over several frames.
// Each frame streams a random number of beats of pixels whose level drifts
// from frame to frame; after 'start_avg' the test waits for 'done', checks the
// latency (DIV_W + 3 cycles, 21 at MAX_PIXELS=1000), both averages against
// floor(sum/count) and the compensation against the reference tree walk and
// leaf values. 'clear' between frames must restart the accumulation.
module tb_frame_comp_unit;
  import tb_ref_pkg::*;
  import sc_pkg::*;
  localparam int MAXP = 1000;
  localparam int LAT  = 8 + $clog2(MAXP + 1) + 3;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         clear = 1'b0, acc_en = 1'b0, start_avg = 1'b0;
  logic [7:0]   px1 [2], px2 [2];
  logic         busy, done;
  logic [7:0]   avg1, avg2;
  comp_t        comp;
  int checks = 0, failures = 0;
  int lv[33];

  frame_comp_unit #(.LANES(2), .MAX_PIXELS(MAXP)) u_dut (
    .clk, .rst_n, .clear, .acc_en, .px1, .px2, .start_avg,
    .busy, .done, .avg1, .avg2, .comp
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int beats, s1, s2, n, base1, base2, v, lat, e1, e2;
    ref_leaf_values(lv);
    px1 = '{default: '0};
    px2 = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 12; f++) begin
      beats = 1 + int'($urandom_range(MAXP / 2 - 1));
      base1 = int'($urandom_range(255));
      base2 = int'($urandom_range(255));
      s1 = 0; s2 = 0; n = 0;
      for (int k = 0; k < beats; k++) begin
        @(negedge clk);
        acc_en = 1'b1;
        for (int l = 0; l < 2; l++) begin
          v = base1 + int'($urandom_range(40)) - 20;
          px1[l] = 8'((v < 0) ? 0 : (v > 255) ? 255 : v);
          v = base2 + int'($urandom_range(40)) - 20;
          px2[l] = 8'((v < 0) ? 0 : (v > 255) ? 255 : v);
          s1 += int'(px1[l]);
          s2 += int'(px2[l]);
          n  += 1;
        end
      end
      @(negedge clk);
      acc_en = 1'b0;
      start_avg = 1'b1;
      @(negedge clk);
      start_avg = 1'b0;
      lat = 1;
      while (!done && lat < 200) begin
        @(negedge clk);
        lat++;
      end
      e1 = s1 / n;
      e2 = s2 / n;
      check("latency", lat, LAT);
      check("avg1", int'(avg1), e1);
      check("avg2", int'(avg2), e2);
      check("comp", int'(comp), lv[ref_leaf(e1, e2)]);
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
