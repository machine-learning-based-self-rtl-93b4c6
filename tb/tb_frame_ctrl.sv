// tb_frame_ctrl: frame sequencing in both modes.
// A scoreboard model of the protocol is stepped beside the controller with
// random valid gaps: component frames must produce an output for every beat;
// accelerator frames must accumulate on every first-pass beat, request the
// averages on the last one, hold in_ready low until avg_done (given here after
// a random delay), then produce outputs with use_frame for the second pass and
// clear at its end. Mode changes between frames are exercised.
module tb_frame_ctrl;
  import sc_pkg::*;
  logic       clk = 1'b0, rst_n = 1'b0;
  comp_mode_e mode;
  logic       in_valid = 1'b0, in_last = 1'b0, in_ready, avg_done = 1'b0;
  logic       acc_en, start_avg, clear, out_en, use_frame, measure_pass, apply_pass;
  int checks = 0, failures = 0;
  int stalls = 0;

  frame_ctrl u_dut (
    .clk, .rst_n, .mode, .in_valid, .in_last, .in_ready, .avg_done,
    .acc_en, .start_avg, .clear, .out_en, .use_frame, .measure_pass, .apply_pass
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sig(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%0t %s: got %0b expected %0b", $time, what, got, exp);
    end
  endtask

  // Send one pass of 'beats' beats; 'meas' says whether it is a measure pass.
  task automatic send_pass(int beats, bit meas, bit apply);
    for (int k = 0; k < beats; k++) begin
      @(negedge clk);
      in_valid = 1'b0;
      repeat ($urandom_range(2)) @(negedge clk);
      in_valid = 1'b1;
      in_last  = (k == beats - 1);
      #1;
      expect_sig("in_ready", in_ready, 1'b1);
      expect_sig("acc_en", acc_en, meas);
      expect_sig("start_avg", start_avg, meas && in_last);
      expect_sig("out_en", out_en, !meas);
      expect_sig("use_frame", use_frame, apply);
      expect_sig("clear", clear, apply && in_last);
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  initial begin
    mode = MODE_COMPONENT;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 10; f++) begin
      int beats, wait_cyc;
      beats = 1 + int'($urandom_range(6));
      mode  = (f % 3 == 0) ? MODE_COMPONENT : MODE_ACCELERATOR;
      if (mode == MODE_COMPONENT) begin
        send_pass(beats, 1'b0, 1'b0);
      end else begin
        send_pass(beats, 1'b1, 1'b0);
        // stall: in_ready low, no beat accepted until avg_done
        wait_cyc = 2 + int'($urandom_range(5));
        in_valid = 1'b1;
        for (int c = 0; c < wait_cyc; c++) begin
          #1;
          expect_sig("stall in_ready", in_ready, 1'b0);
          expect_sig("stall out_en", out_en, 1'b0);
          stalls++;
          @(negedge clk);
        end
        in_valid = 1'b0;
        avg_done = 1'b1;
        @(negedge clk);
        avg_done = 1'b0;
        expect_sig("apply_pass", apply_pass, 1'b1);
        send_pass(beats, 1'b0, 1'b1);
      end
      #1;
      expect_sig("back to idle (apply_pass low)", apply_pass, 1'b0);
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
