// frame_comp_unit: accelerator-level compensation for one colour component.
//
// During the measure pass of a frame it accumulates the pixels of image 1 and
// of image 2 (LANES pixels of each per accepted beat) and counts the pixels.
// A pulse on 'start_avg' starts two restoring dividers that form the two frame
// averages (floor of sum / count); when they finish, the averages go through
// one decision-tree compensation module and the resulting compensation is
// registered in 'comp', where it stays for the whole apply pass and until the
// next frame is measured. 'done' pulses for one cycle when 'comp' is updated,
// DIV_W+3 cycles after 'start_avg' (28 cycles at the default size).
// The paper states that one compensation value, predicted by the decision
// tree from the average pixel values of a frame colour component, is added to
// every pixel of that component. Streaming the frame twice instead of
// buffering it, and the divider, are this design's choices.
// 'clear' restarts the accumulation for a new frame. Frames longer than
// MAX_PIXELS pixels are not supported (checked by an assertion).
module frame_comp_unit
  import sc_pkg::*;
#(
  parameter int unsigned LANES      = 2,
  parameter int unsigned MAX_PIXELS = 100000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         acc_en,
  input  logic [N-1:0] px1 [LANES],
  input  logic [N-1:0] px2 [LANES],
  input  logic         start_avg,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] avg1,
  output logic [N-1:0] avg2,
  output comp_t        comp
);
  localparam int unsigned CNT_W = $clog2(MAX_PIXELS + 1);
  localparam int unsigned DIV_W = N + CNT_W;

  logic [DIV_W-1:0] sum1, sum2, add1, add2;
  logic [CNT_W-1:0] cnt;
  logic [DIV_W-1:0] q1, q2;
  logic             busy1, busy2, done1, done2;
  logic [LEAF_W-1:0] leaf;
  comp_t            comp_next;

  always_comb begin
    add1 = '0;
    add2 = '0;
    for (int l = 0; l < LANES; l++) begin
      add1 += DIV_W'(px1[l]);
      add2 += DIV_W'(px2[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum1 <= '0;
      sum2 <= '0;
      cnt  <= '0;
    end else if (clear) begin
      sum1 <= '0;
      sum2 <= '0;
      cnt  <= '0;
    end else if (acc_en) begin
      sum1 <= sum1 + add1;
      sum2 <= sum2 + add2;
      cnt  <= cnt + CNT_W'(LANES);
    end
  end

  seq_divider #(.DW(DIV_W), .VW(CNT_W)) u_div1 (
    .clk, .rst_n, .start(start_avg), .dividend(sum1), .divisor(cnt),
    .busy(busy1), .done(done1), .quot(q1)
  );

  seq_divider #(.DW(DIV_W), .VW(CNT_W)) u_div2 (
    .clk, .rst_n, .start(start_avg), .dividend(sum2), .divisor(cnt),
    .busy(busy2), .done(done2), .quot(q2)
  );

  // The averages are registered on the divider's done pulse; the tree reads
  // the registered averages and its result is captured one cycle later.
  logic avg_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avg1   <= '0;
      avg2   <= '0;
      avg_ok <= 1'b0;
      comp   <= '0;
      done   <= 1'b0;
    end else begin
      avg_ok <= done1;
      done   <= avg_ok;
      if (done1) begin
        avg1 <= q1[N-1:0];
        avg2 <= q2[N-1:0];
      end
      if (avg_ok) comp <= comp_next;
    end
  end

  dt_comp_module u_dt (
    .in1 (avg1),
    .in2 (avg2),
    .leaf(leaf),
    .comp(comp_next)
  );

  assign busy = busy1 | avg_ok | start_avg;

  logic unused;
  assign unused = busy2 | done2 | (|q1[DIV_W-1:N]) | (|q2[DIV_W-1:N]) | (|leaf);

  a_frame_size: assert property (@(posedge clk) disable iff (!rst_n)
    (acc_en && !clear) |-> (int'(cnt) + int'(LANES) <= int'(MAX_PIXELS)))
    else $error("frame_comp_unit: frame longer than MAX_PIXELS");
endmodule
