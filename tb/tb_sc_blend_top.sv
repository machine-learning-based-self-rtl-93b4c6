// tb_sc_blend_top: end-to-end test of the blending engine at a reduced
// frame size (MAX_PIXELS = 512).
//
// Synthetic RGB image pairs of 32 x 16 pixels are generated here: smooth
// gradients with a little noise, so that neighbouring pixels are close as in
// natural images, plus a dark/bright patch that drives some compensated
// products below zero (clamped). Frames are sent in this order:
//   1. component-level compensation (one pass);
//   2. accelerator-level compensation (measure pass, stall, apply pass);
//   3. component-level again (mode switch back).
// in_valid has random gaps and is also held high during the stall, when no
// beat may be accepted. Every output beat is compared with a reference built
// from the reference multiplier, tree and leaf values in tb_ref_pkg, and the
// latency of one clock is checked. The testbench counts each mechanism
// (component pass, measure pass, stall, apply pass, mode switch, clamp) and
// fails if one never happened. It also prints the PSNR of the blended 8-bit
// images (round(product/255)) without compensation and in each mode.
module tb_sc_blend_top;
  import tb_ref_pkg::*;
  import sc_pkg::*;
  localparam int W = 32;
  localparam int H = 16;
  localparam int NPIX = W * H;
  localparam int BEATS = NPIX / 2;

  logic         clk = 1'b0, rst_n = 1'b0;
  comp_mode_e   mode = MODE_COMPONENT;
  logic         in_valid = 1'b0, in_last = 1'b0, in_ready;
  logic [7:0]   in_px1 [3][2], in_px2 [3][2];
  logic         out_valid, out_last;
  logic [15:0]  out_prod [3][2];
  logic [16:0]  out_sum [3];
  logic [5:0]   out_sat;
  logic         measure_pass, apply_pass;
  comp_t        frame_comp [3];

  int checks = 0, failures = 0;
  int lv[33];
  byte unsigned img1 [3][NPIX];
  byte unsigned img2 [3][NPIX];
  int exp_q [$];          // expected products, 6 per beat, then sums 3
  int beats_out = 0;
  int n_comp_pass = 0, n_measure = 0, n_stall = 0, n_apply = 0, n_switch = 0, n_clamp = 0;
  int fcomp [3];
  real se_none, se_comp, se_acc;

  sc_blend_top #(.MAX_PIXELS(512)) u_dut (
    .clk, .rst_n, .mode, .in_valid, .in_last, .in_ready, .in_px1, .in_px2,
    .out_valid, .out_last, .out_prod, .out_sum, .out_sat, .measure_pass,
    .apply_pass, .frame_comp
  );

  always #5 clk = ~clk;

  initial begin
    #(10000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blend8(int p);
    int v;
    v = (p + 127) / 255;
    return (v > 255) ? 255 : v;
  endfunction

  // Output checker: one clock after each output-producing beat.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int e, sum;
      beats_out++;
      for (int c = 0; c < 3; c++) begin
        sum = 0;
        for (int l = 0; l < 2; l++) begin
          e = exp_q.pop_front();
          sum += e;
          checks++;
          if (int'(out_prod[c][l]) != e) begin
            failures++;
            if (failures < 20) $display("%0t ch%0d lane%0d: got %0d expected %0d", $time, c, l, out_prod[c][l], e);
          end
        end
        checks++;
        if (int'(out_sum[c]) != sum) failures++;
      end
      n_clamp += $countones(out_sat);
    end
  end

  task automatic make_images(int seed);
    int v;
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          v = (x * 255) / W + (c * 40) + seed + int'($urandom_range(8));
          img1[c][y*W+x] = byte'(v % 256);
          v = (y * 255) / H + 255 - (c * 60) - seed + int'($urandom_range(8));
          img2[c][y*W+x] = byte'(((v % 256) + 256) % 256);
          if (x < W / 8 && y < H / 8) begin
            img1[c][y*W+x] = 8'(x % 3);
            img2[c][y*W+x] = 8'(250 + (y % 5));
          end
        end
  endtask

  // Stream one pass of the current images. expect_kind: 0 none (measure),
  // 1 component compensation, 2 frame compensation.
  task automatic send_pass(int expect_kind);
    int a, b, p, k;
    real d;
    for (int i = 0; i < BEATS; i++) begin
      @(negedge clk);
      in_valid = 1'b0;
      if ($urandom_range(7) == 0) @(negedge clk);
      for (int c = 0; c < 3; c++)
        for (int l = 0; l < 2; l++) begin
          in_px1[c][l] = img1[c][2*i+l];
          in_px2[c][l] = img2[c][2*i+l];
        end
      in_valid = 1'b1;
      in_last  = (i == BEATS - 1);
      #1;
      checks++;
      if (!in_ready) failures++;
      if (expect_kind != 0)
        for (int c = 0; c < 3; c++)
          for (int l = 0; l < 2; l++) begin
            a = img1[c][2*i+l];
            b = img2[c][2*i+l];
            k = (expect_kind == 1) ? lv[ref_leaf(a, b)] : fcomp[c];
            p = ref_clamp(ref_apx(a, b), k);
            exp_q.push_back(p);
            d = real'(blend8(a * b) - blend8(p));
            if (expect_kind == 1) se_comp += d * d;
            else                  se_acc  += d * d;
            if (expect_kind == 1) begin
              d = real'(blend8(a * b) - blend8(ref_apx(a, b)));
              se_none += d * d;
            end
          end
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  function automatic real psnr(real se, int n);
    if (se == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 / (se / real'(n)));
  endfunction

  task automatic frame_component();
    if (mode != MODE_COMPONENT) n_switch++;
    mode = MODE_COMPONENT;
    send_pass(1);
    n_comp_pass++;
  endtask

  task automatic frame_accelerator();
    int s1, s2, stall;
    if (mode != MODE_ACCELERATOR) n_switch++;
    mode = MODE_ACCELERATOR;
    for (int c = 0; c < 3; c++) begin
      s1 = 0; s2 = 0;
      for (int i = 0; i < NPIX; i++) begin
        s1 += img1[c][i];
        s2 += img2[c][i];
      end
      fcomp[c] = lv[ref_leaf(s1 / NPIX, s2 / NPIX)];
    end
    @(negedge clk);
    checks++;
    if (!measure_pass) failures++;
    send_pass(0);
    n_measure++;
    // hold valid high through the stall; nothing may be taken
    in_valid = 1'b1;
    stall = 0;
    #1;
    while (!in_ready && stall < 1000) begin
      checks++;
      if (out_valid) failures++;
      n_stall++;
      stall++;
      @(negedge clk);
      #1;
    end
    in_valid = 1'b0;
    checks++;
    if (stall != 8 + $clog2(512 + 1) + 3) begin
      failures++;
      $display("stall lasted %0d cycles", stall);
    end
    checks++;
    if (!apply_pass) failures++;
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (int'(frame_comp[c]) != fcomp[c]) begin
        failures++;
        $display("ch%0d frame compensation %0d expected %0d", c, frame_comp[c], fcomp[c]);
      end
    end
    send_pass(2);
    n_apply++;
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end
    $display("  %-22s %0d", what, n);
  endtask

  initial begin
    se_none = 0.0; se_comp = 0.0; se_acc = 0.0;
    ref_leaf_values(lv);
    for (int c = 0; c < 3; c++) begin
      in_px1[c] = '{default: '0};
      in_px2[c] = '{default: '0};
    end
    make_images(0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    frame_component();
    frame_accelerator();
    make_images(30);
    frame_component();
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || beats_out != 3 * BEATS) begin
      failures++;
      $display("outputs: %0d beats, %0d values left", beats_out, exp_q.size());
    end
    $display("mechanisms:");
    need("component passes", n_comp_pass);
    need("measure passes", n_measure);
    need("stall cycles", n_stall);
    need("apply passes", n_apply);
    need("mode switches", n_switch);
    need("clamped products", n_clamp);
    $display("PSNR of blended images (component frames): none %0.2f dB, component %0.2f dB",
             psnr(se_none, 2 * 3 * NPIX), psnr(se_comp, 2 * 3 * NPIX));
    $display("PSNR of blended image (accelerator-level frame): %0.2f dB", psnr(se_acc, 3 * NPIX));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
