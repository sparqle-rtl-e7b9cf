// write_combine_buffer: gathers a variable number of 4-bit values per beat
// into full 16 B SRAM lines (drain path, paper Fig. 4(c)).
//
// Each accepted beat appends in_count nibbles (in_nib nibble 0 first) behind
// the data already held. As soon as 32 nibbles (one line) are present the
// line is offered on out_line (valid/ready). A beat with in_flush set closes
// the current group: the remainder is offered as a zero-padded partial line,
// and no new beat is taken until it has left. A flush of
// an empty buffer emits nothing, so an all-zero MSB4 group costs no write.
// The buffer holds two lines. The paper names the LSB4 and MSB4 write-combine
// buffers and their 16 B line; the flush rule and the per-buffer (not joint)
// write-out are this design's choices. The PBM stream uses a third instance.
//
// Timing: a line can leave in the cycle after the beat that completes it;
// one beat in and one line out per cycle.
module write_combine_buffer #(
  parameter int unsigned IN_N = 16     // max nibbles per beat
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [$clog2(IN_N+1)-1:0]  in_count,
  input  logic [IN_N*4-1:0]          in_nib,
  input  logic                       in_flush,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [127:0]               out_line,
  output logic                       empty
);
  localparam int unsigned CAP = 64;   // nibbles held (two lines)

  logic [CAP*4-1:0] buf_q;
  logic [6:0]       fill_q;           // 0..64
  logic             flush_q;

  assign out_valid = (fill_q >= 7'd32) || (flush_q && fill_q != 0);
  assign out_line  = buf_q[127:0];
  assign in_ready  = !flush_q && (int'(fill_q) <= CAP - IN_N);
  assign empty     = (fill_q == 0) && !flush_q;

  logic [CAP*4-1:0]  buf_d;
  logic [6:0]        fill_d;
  logic [IN_N*4-1:0] masked;
  always_comb begin
    buf_d  = buf_q;
    fill_d = fill_q;
    if (out_valid && out_ready) begin
      buf_d  = buf_d >> 128;
      fill_d = (fill_d >= 7'd32) ? fill_d - 7'd32 : 7'd0;
    end
    for (int i = 0; i < IN_N; i++)
      masked[i*4 +: 4] = (i < int'(in_count)) ? in_nib[i*4 +: 4] : 4'h0;
    if (in_valid && in_ready) begin
      buf_d  = buf_d | ({{(CAP-IN_N)*4{1'b0}}, masked} << (int'(fill_d) * 4));
      fill_d = fill_d + 7'(in_count);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      fill_q  <= '0;
      flush_q <= 1'b0;
    end else begin
      buf_q  <= buf_d;
      fill_q <= fill_d;
      if (in_valid && in_ready && in_flush)
        flush_q <= (fill_d != 0);
      else if (fill_d == 0)
        flush_q <= 1'b0;
    end
  end

  // A flushed partial line must leave before the next group starts.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid && in_ready |-> !flush_q);
endmodule
