// sc_blend_top: multiplicative image blending on three self-compensating
// approximate accelerators.
//
// Two RGB images are multiplied pixel by pixel. Each colour component (0 red,
// 1 green, 2 blue) is processed on its own sc_axacc, two adjacent pixels per
// beat, as the paper proposes. One frame_ctrl sequences all three channels:
// in component mode a frame is sent once; in accelerator mode it is sent
// twice (measure pass, then apply pass) with a stall between the passes while
// the per-channel frame averages and compensations are computed.
// Interface: valid/ready input stream with 'in_last' on the last beat of a
// frame; 'mode' is taken on the first beat of a frame. Outputs follow an
// accepted output-producing beat by one clock; out_last marks the frame end.
// out_prod holds the 16-bit compensated products (no rescaling to 8 bits),
// out_sum the exact-adder result of each channel.
module sc_blend_top
  import sc_pkg::*;
#(
  parameter int unsigned MAX_PIXELS = 100000  // pixels per colour component
) (
  input  logic           clk,
  input  logic           rst_n,
  input  comp_mode_e     mode,
  input  logic           in_valid,
  input  logic           in_last,
  output logic           in_ready,
  input  logic [N-1:0]   in_px1 [3][2],
  input  logic [N-1:0]   in_px2 [3][2],
  output logic           out_valid,
  output logic           out_last,
  output logic [P_W-1:0] out_prod [3][2],
  output logic [P_W:0]   out_sum [3],
  output logic [5:0]     out_sat,
  output logic           measure_pass,
  output logic           apply_pass,
  output comp_t          frame_comp [3]
);
  logic       acc_en, start_avg, clear, out_en, use_frame;
  logic [2:0] avg_done;
  logic [2:0] ch_valid;

  frame_ctrl u_ctrl (
    .clk, .rst_n, .mode, .in_valid, .in_last, .in_ready,
    .avg_done    (&avg_done),
    .acc_en, .start_avg, .clear, .out_en, .use_frame,
    .measure_pass, .apply_pass
  );

  for (genvar ch = 0; ch < 3; ch++) begin : g_ch
    sc_axacc #(.MAX_PIXELS(MAX_PIXELS)) u_acc (
      .clk, .rst_n,
      .px1       (in_px1[ch]),
      .px2       (in_px2[ch]),
      .out_en, .use_frame, .acc_en, .clear, .start_avg,
      .avg_done  (avg_done[ch]),
      .frame_comp(frame_comp[ch]),
      .out_valid (ch_valid[ch]),
      .prod      (out_prod[ch]),
      .sum       (out_sum[ch]),
      .sat       (out_sat[2*ch +: 2])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_last <= 1'b0;
    else        out_last <= out_en && in_last;
  end

  assign out_valid = ch_valid[0];

  logic unused;
  assign unused = ^ch_valid[2:1];
endmodule
