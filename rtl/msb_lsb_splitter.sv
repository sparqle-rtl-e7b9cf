// msb_lsb_splitter: splits a 16 B beat of Int8 activations into its two
// 4-bit halves (drain path, paper Fig. 4(c): "16x8b -> 16x4b LSB, 16x4b MSB
// -> Pad -> 16x8b").
//   lsb[i] = x[i][3:0]            dense stream, 8 B per beat
//   msb_pad[i] = {4'b0, x[i][7:4]} upper nibble padded to a byte so that a
//                                  byte-granular sparse encoder can compress it
// The pad value (zero) is this design's choice; the paper only says the
// nibble is padded to 8 bits. Purely combinational.
module msb_lsb_splitter #(
  parameter int unsigned LANES = 16
) (
  input  logic [7:0] x       [LANES],
  output logic [3:0] lsb     [LANES],
  output logic [7:0] msb_pad [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      lsb[i]     = x[i][3:0];
      msb_pad[i] = {4'b0000, x[i][7:4]};
    end
  end
endmodule
