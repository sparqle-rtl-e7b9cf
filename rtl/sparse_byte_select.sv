// sparse_byte_select: turns a logical request "the MSB4 values of 32-channel
// group g" into physical positions inside a compressed MSB4 slot.
//
// In SRAM the non-zero MSB4 nibbles of one token's 128 channels (four
// 32-channel groups) are packed back to back in a slot of four lines, in
// channel order; the PBM line of the same token holds the four 32-bit group
// bitmaps. The nibbles of group g therefore start at the number of set PBM
// bits in groups 0..g-1 and there are popcount(PBM group g) of them. From
// the PBM line and g this block gives that nibble offset and count, the
// first slot line to read, and whether a second line is needed. The paper
// names the "IF sparse byte select module" and its logical-to-physical byte
// select role; the slot layout is this design's choice. Combinational.
module sparse_byte_select (
  input  logic [127:0] pbm_line,     // four 32-bit group bitmaps
  input  logic [1:0]   group,        // logical group 0..3
  output logic [6:0]   nib_offset,   // first nibble in the slot (0..127)
  output logic [5:0]   nib_count,    // 0..32
  output logic [1:0]   first_line,   // slot line holding the first nibble
  output logic [1:0]   num_lines,    // 0, 1 or 2 lines to fetch
  output logic [31:0]  group_pbm
);
  always_comb begin
    logic [7:0] off;
    logic [7:0] last;
    off = '0;
    for (int g = 0; g < 4; g++)
      if (g < int'(group)) off = off + 8'($countones(pbm_line[g*32 +: 32]));
    group_pbm  = pbm_line[group*32 +: 32];
    nib_count  = 6'($countones(group_pbm));
    nib_offset = off[6:0];
    first_line = off[6:5];
    last       = off + 8'(nib_count) - 8'd1;
    if (nib_count == 0)             num_lines = 2'd0;
    else if (last[6:5] == off[6:5]) num_lines = 2'd1;
    else                            num_lines = 2'd2;
  end
endmodule
