// circular_buffer: ring buffer of SRAM lines between the SRAM and the column
// buffers (load path, paper Fig. 4(a): "IF/FL circular buffer" with its
// "circular buffer FSM" driven by read enables).
//
// Write pointer, read pointer and an occupancy count form the FSM; push when
// not full, pop when not empty, both in one cycle allowed. Each entry carries
// a line and a small tag telling the consumer what the line is. Read data is
// the head entry, combinationally (first-word fall-through).
// Depth and tag width are this design's choices.
module circular_buffer #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned TAG_W = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               push,
  input  logic [127:0]       push_line,
  input  logic [TAG_W-1:0]   push_tag,
  output logic               full,
  input  logic               pop,
  output logic [127:0]       head_line,
  output logic [TAG_W-1:0]   head_tag,
  output logic               empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [127:0]     line_mem [DEPTH];
  logic [TAG_W-1:0] tag_mem  [DEPTH];
  logic [PW-1:0]    wr_q, rd_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  assign full      = (int'(cnt_q) == DEPTH);
  assign empty     = (cnt_q == 0);
  assign count     = cnt_q;
  assign head_line = line_mem[rd_q];
  assign head_tag  = tag_mem[rd_q];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) begin
      line_mem[wr_q] <= push_line;
      tag_mem[wr_q]  <= push_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q  <= '0;
      rd_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= (int'(wr_q) == DEPTH-1) ? '0 : wr_q + 1'b1;
      if (do_pop)  rd_q <= (int'(rd_q) == DEPTH-1) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (do_push ? 1 : 0) - (do_pop ? 1 : 0);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
