// subprec_clip: sub-precision sparsity enhancement by selective clipping.
//
// For every lane, an Int8 activation x of a column marked "low importance"
// in the column-importance mask is pulled into the range whose MSB4 is zero:
//   l <= x < 0   ->  0   (lower bound lp_l)
//   15 < x <= h  ->  15  (upper bound lp_h)
// Values outside [l, h], and all values of important columns, pass unchanged.
// This is exactly the rule of the paper's clipping algorithm; the constants l,
// h and the mask are computed offline. Where in the hardware the clip is
// applied is not stated in the paper: here it sits in the drain path, after
// requantisation and before the MSB4/LSB4 split, so that the activations
// written back to SRAM are already clipped. Purely combinational.
module subprec_clip #(
  parameter int unsigned LANES = 16
) (
  input  logic signed [7:0] x      [LANES],
  input  logic [LANES-1:0]  col_mask,   // 1 = low-importance column, clipping allowed
  input  logic signed [7:0] clip_l,
  input  logic signed [7:0] clip_h,
  output logic signed [7:0] y      [LANES],
  output logic [LANES-1:0]  clipped     // lane was changed
);
  import sparqle_pkg::*;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      y[i]       = x[i];
      clipped[i] = 1'b0;
      if (col_mask[i]) begin
        if (x[i] >= clip_l && x[i] < LP_L) begin
          y[i] = LP_L;  clipped[i] = 1'b1;
        end else if (x[i] > LP_H && x[i] <= clip_h) begin
          y[i] = LP_H;  clipped[i] = 1'b1;
        end
      end
    end
  end
endmodule
