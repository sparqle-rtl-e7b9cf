// sparse_encoder: zero-value compression of one beat of padded MSB4 bytes.
//
// Produces the precision bitmap (bit i = 1 when byte i is non-zero), the
// non-zero bytes packed towards index 0 in lane order, their count, and the
// same values with the pad removed (nibble i of nib_out = low nibble of the
// i-th non-zero byte), which is what the MSB4 write-combine buffer stores.
// The paper takes the encoder from prior work and gives only its function;
// this is a plain prefix-count compaction. Purely combinational.
module sparse_encoder #(
  parameter int unsigned LANES = 16
) (
  input  logic [7:0]               in_bytes [LANES],
  output logic [LANES-1:0]         bitmap,
  output logic [7:0]               packed_bytes [LANES],
  output logic [LANES*4-1:0]       nib_out,
  output logic [$clog2(LANES+1)-1:0] count
);
  always_comb begin
    int unsigned pos;
    pos = 0;
    nib_out = '0;
    for (int i = 0; i < LANES; i++) packed_bytes[i] = 8'h00;
    for (int i = 0; i < LANES; i++) begin
      bitmap[i] = (in_bytes[i] != 8'h00);
      if (bitmap[i]) begin
        packed_bytes[pos[$clog2(LANES)-1:0]] = in_bytes[i];
        nib_out[pos*4 +: 4] = in_bytes[i][3:0];
        pos = pos + 1;
      end
    end
    count = pos[$clog2(LANES+1)-1:0];
  end
endmodule
