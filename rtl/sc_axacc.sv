// sc_axacc: self-compensating approximate accelerator for one colour
// component.
//
// Two approximate multipliers work on two adjacent pixel pairs per beat
// (A*B and C*D) and an exact adder forms A*B + C*D, as in the paper's
// two-multiplier accelerator. Both compensation configurations of the paper
// are present:
//   component level  - each multiplier has its own decision-tree module that
//                      predicts its error from its own operands;
//   accelerator level - one frame_comp_unit predicts a single compensation
//                      from the frame averages of the two images and it is
//                      added to every product of the frame.
// 'use_frame' selects the second; having both in one accelerator and
// selecting at run time is this design's choice. Each compensated product is
// clamped to 0..65535 ('sat' flags a clamp).
// Timing: px1/px2 sampled when out_en is high; prod, sum and out_valid appear
// one clock later. The frame unit's control inputs come from frame_ctrl.
module sc_axacc
  import sc_pkg::*;
#(
  parameter int unsigned MAX_PIXELS = 100000
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   px1 [2],     // image 1 pixels (A, C)
  input  logic [N-1:0]   px2 [2],     // image 2 pixels (B, D)
  input  logic           out_en,
  input  logic           use_frame,
  input  logic           acc_en,
  input  logic           clear,
  input  logic           start_avg,
  output logic           avg_done,
  output comp_t          frame_comp,
  output logic           out_valid,
  output logic [P_W-1:0] prod [2],
  output logic [P_W:0]   sum,
  output logic [1:0]     sat
);
  logic [P_W-1:0] p_apx [2];
  logic [P_W-1:0] p_cmp [2];
  logic [P_W-1:0] p_frm [2];
  logic [P_W-1:0] p_sel [2];
  logic [1:0]     sat_c, sat_f, sat_sel;
  comp_t          comp_c [2];
  logic [P_W:0]   sum_c;
  logic [N-1:0]   avg1, avg2;
  logic           fbusy;

  for (genvar l = 0; l < 2; l++) begin : g_lane
    sc_approx_mult u_scm (
      .a     (px1[l]),
      .b     (px2[l]),
      .p_apx (p_apx[l]),
      .p_comp(p_cmp[l]),
      .comp  (comp_c[l]),
      .sat   (sat_c[l])
    );

    comp_adder u_fadd (
      .p  (p_apx[l]),
      .c  (frame_comp),
      .y  (p_frm[l]),
      .sat(sat_f[l])
    );

    assign p_sel[l]   = use_frame ? p_frm[l] : p_cmp[l];
    assign sat_sel[l] = use_frame ? sat_f[l] : sat_c[l];
  end

  exact_adder #(.W(P_W)) u_add (
    .x(p_sel[0]),
    .y(p_sel[1]),
    .s(sum_c)
  );

  frame_comp_unit #(.LANES(2), .MAX_PIXELS(MAX_PIXELS)) u_frame (
    .clk, .rst_n, .clear, .acc_en,
    .px1, .px2,
    .start_avg,
    .busy (fbusy),
    .done (avg_done),
    .avg1 (avg1),
    .avg2 (avg2),
    .comp (frame_comp)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      prod      <= '{default: '0};
      sum       <= '0;
      sat       <= '0;
    end else begin
      out_valid <= out_en;
      if (out_en) begin
        prod <= p_sel;
        sum  <= sum_c;
        sat  <= sat_sel;
      end
    end
  end

  logic unused;
  assign unused = fbusy | (|avg1) | (|avg2) | (|comp_c[0]) | (|comp_c[1]);
endmodule
