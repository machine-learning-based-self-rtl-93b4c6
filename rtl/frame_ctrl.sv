// frame_ctrl: frame sequencer shared by the three colour accelerators.
//
// Pixels arrive as beats with a valid/ready handshake; 'in_last' marks the
// last beat of a frame. The compensation mode is sampled on the first beat of
// each frame and held for the frame.
//   Component mode: one pass; every accepted beat produces an output beat.
//   Accelerator mode: the frame is sent twice. The first (measure) pass only
//     accumulates the frame averages and produces no output. After its last
//     beat the controller drops 'in_ready' while the averages and the frame
//     compensation are computed ('avg_done' ends the stall). The second
//     (apply) pass produces the outputs with the frame compensation added.
// The paper asks for a per-frame compensation predicted from the frame
// averages; the two-pass protocol and the stall are this design's choices.
// All outputs except the state-derived flags are combinational on the
// handshake; state changes on the clock edge.
module frame_ctrl
  import sc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  comp_mode_e mode,
  input  logic       in_valid,
  input  logic       in_last,
  output logic       in_ready,
  input  logic       avg_done,
  output logic       acc_en,      // accumulate this beat (measure pass)
  output logic       start_avg,   // last measure beat accepted
  output logic       clear,       // restart frame accumulation
  output logic       out_en,      // this beat produces an output
  output logic       use_frame,   // outputs use the frame compensation
  output logic       measure_pass,
  output logic       apply_pass
);
  typedef enum logic [2:0] {
    S_IDLE, S_COMP, S_MEASURE, S_DIVIDE, S_APPLY
  } state_e;

  state_e state, state_n;
  logic   fire;
  logic   accel_first;

  assign in_ready     = (state != S_DIVIDE);
  assign fire         = in_valid && in_ready;
  assign accel_first  = (state == S_IDLE) && (mode == MODE_ACCELERATOR);
  assign measure_pass = accel_first || (state == S_MEASURE);
  assign apply_pass   = (state == S_APPLY);
  assign acc_en       = fire && measure_pass;
  assign start_avg    = acc_en && in_last;
  assign out_en       = fire && !measure_pass;
  assign use_frame    = apply_pass;
  assign clear        = fire && in_last && apply_pass;

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:
        if (fire) begin
          if (mode == MODE_ACCELERATOR) state_n = in_last ? S_DIVIDE : S_MEASURE;
          else                          state_n = in_last ? S_IDLE   : S_COMP;
        end
      S_COMP:    if (fire && in_last) state_n = S_IDLE;
      S_MEASURE: if (fire && in_last) state_n = S_DIVIDE;
      S_DIVIDE:  if (avg_done)        state_n = S_APPLY;
      S_APPLY:   if (fire && in_last) state_n = S_IDLE;
      default:                        state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_n;
  end

  // No beat may be accepted while the averages are being computed.
  a_no_beat_in_stall: assert property (@(posedge clk) disable iff (!rst_n)
    !(state == S_DIVIDE && fire))
    else $error("frame_ctrl: beat accepted during stall");
endmodule
