// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A pulse on 'start' loads dividend and divisor; DW clocks later 'done' pulses
// for one cycle with quot = dividend / divisor (floor). 'busy' is high while
// it works. A zero divisor gives an all-ones quotient. Used by
// frame_comp_unit to turn frame pixel sums into averages; the paper does not
// say how the average is formed, the divider is this design's choice.
module seq_divider #(
  parameter int unsigned DW = 25,   // dividend and quotient width
  parameter int unsigned VW = 17    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [DW-1:0] quot
);
  localparam int unsigned CW = $clog2(DW + 1);

  logic [VW-1:0] rem;
  logic [DW-1:0] q;
  logic [VW-1:0] dv;
  logic [CW-1:0] cnt;
  logic [VW:0]   trial;

  assign trial = {rem, q[DW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      q    <= '0;
      dv   <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem  <= '0;
        q    <= dividend;
        dv   <= divisor;
        cnt  <= CW'(DW);
        busy <= 1'b1;
      end else if (busy) begin
        if (trial >= {1'b0, dv}) begin
          rem <= VW'(trial - {1'b0, dv});
          q   <= {q[DW-2:0], 1'b1};
        end else begin
          rem <= trial[VW-1:0];
          q   <= {q[DW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quot = q;
endmodule
