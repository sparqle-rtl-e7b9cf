// requant_unit: Int32 accumulator to Int8 activation quantisation in the
// drain path (the quantisation part of the paper's special function units).
//   y = saturate_int8(acc >>> shift)
// The paper states only that the drain SFUs perform Int8/Int4 quantisation;
// the arithmetic shift with saturation (no rounding, no zero point) is this
// design's choice. Purely combinational.
module requant_unit #(
  parameter int unsigned LANES = 16
) (
  input  logic signed [31:0] acc [LANES],
  input  logic [4:0]         shift,
  output logic signed [7:0]  y   [LANES],
  output logic [LANES-1:0]   saturated
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [31:0] s;
      s = acc[i] >>> shift;
      saturated[i] = 1'b0;
      if (s > 32'sd127) begin
        y[i] = 8'sd127;  saturated[i] = 1'b1;
      end else if (s < -32'sd128) begin
        y[i] = -8'sd128; saturated[i] = 1'b1;
      end else begin
        y[i] = s[7:0];
      end
    end
  end
endmodule
