// dt_comp_module: decision-tree compensation module.
//
// Predicts the error of the approximate multiplier from its two operands and
// returns the signed value to add to the approximate product. Each 8-bit
// operand is first mapped to one of 16 clusters (cluster = operand/16 + 1,
// numbered 1..16). The two clusters then walk a fixed binary decision tree of
// 32 decision nodes: a node compares the cluster of Input1 (q1) or of Input2
// (q2) with a threshold and goes left when it is less than or equal to the
// threshold, right otherwise. The reached leaf (0..32, left to right as the
// tree is drawn) selects a value from sc_pkg::LEAF_VALUE.
// The tree shape, its variables and thresholds are the paper's trained C5.0
// model; the cluster mapping and the leaf values are this design's own (the
// paper does not print them, see sc_pkg).
// Purely combinational, in parallel with the multiplier.
module dt_comp_module
  import sc_pkg::*;
(
  input  logic [N-1:0]      in1,
  input  logic [N-1:0]      in2,
  output logic [LEAF_W-1:0] leaf,
  output comp_t             comp
);
  logic [CL_W-1:0] q1, q2;

  assign q1 = cluster_of(in1);
  assign q2 = cluster_of(in2);

  always_comb begin
      if (q1 <= 5'd9) begin
        if (q1 <= 5'd1) begin
          if (q2 <= 5'd14) begin
            if (q2 <= 5'd2) begin
              leaf = 6'd0;
            end else begin
              leaf = 6'd1;
            end
          end else begin
            leaf = 6'd2;
          end
        end else begin
          if (q2 <= 5'd12) begin
            if (q2 <= 5'd4) begin
              if (q2 <= 5'd2) begin
                if (q1 <= 5'd3) begin
                  leaf = 6'd3;
                end else begin
                  if (q2 <= 5'd1) begin
                    if (q1 <= 5'd7) begin
                      leaf = 6'd4;
                    end else begin
                      leaf = 6'd5;
                    end
                  end else begin
                    leaf = 6'd6;
                  end
                end
              end else begin
                leaf = 6'd7;
              end
            end else begin
              if (q1 <= 5'd5) begin
                leaf = 6'd8;
              end else begin
                leaf = 6'd9;
              end
            end
          end else begin
            if (q1 <= 5'd5) begin
              leaf = 6'd10;
            end else begin
              leaf = 6'd11;
            end
          end
        end
      end else begin
        if (q2 <= 5'd3) begin
          if (q2 <= 5'd1) begin
            if (q1 <= 5'd14) begin
              leaf = 6'd12;
            end else begin
              leaf = 6'd13;
            end
          end else begin
            if (q1 <= 5'd10) begin
              leaf = 6'd14;
            end else begin
              if (q2 <= 5'd2) begin
                if (q1 <= 5'd13) begin
                  leaf = 6'd15;
                end else begin
                  leaf = 6'd16;
                end
              end else begin
                leaf = 6'd17;
              end
            end
          end
        end else begin
          if (q2 <= 5'd13) begin
            if (q2 <= 5'd9) begin
              if (q2 <= 5'd8) begin
                if (q2 <= 5'd5) begin
                  if (q1 <= 5'd12) begin
                    if (q2 <= 5'd4) begin
                      leaf = 6'd18;
                    end else begin
                      leaf = 6'd19;
                    end
                  end else begin
                    leaf = 6'd20;
                  end
                end else begin
                  if (q1 <= 5'd13) begin
                    if (q2 <= 5'd7) begin
                      if (q2 <= 5'd6) begin
                        leaf = 6'd21;
                      end else begin
                        leaf = 6'd22;
                      end
                    end else begin
                      leaf = 6'd23;
                    end
                  end else begin
                    leaf = 6'd24;
                  end
                end
              end else begin
                if (q1 <= 5'd14) begin
                  leaf = 6'd25;
                end else begin
                  leaf = 6'd26;
                end
              end
            end else begin
              if (q2 <= 5'd12) begin
                leaf = 6'd27;
              end else begin
                if (q1 <= 5'd13) begin
                  leaf = 6'd28;
                end else begin
                  leaf = 6'd29;
                end
              end
            end
          end else begin
            if (q1 <= 5'd12) begin
              if (q1 <= 5'd10) begin
                leaf = 6'd30;
              end else begin
                leaf = 6'd31;
              end
            end else begin
              leaf = 6'd32;
            end
          end
        end
      end  end

  assign comp = LEAF_VALUE[leaf];
endmodule
