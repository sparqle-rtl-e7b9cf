// tb_write_combine_buffer: random beats of 0..16 nibbles with random flushes
// and a randomly stalling line consumer. A queue model predicts every line:
// full lines as soon as 32 nibbles are present, a zero-padded last line at a
// flush, no line for an empty flush.
module tb_write_combine_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_flush = 0;
  logic [4:0] in_count = '0;
  logic [63:0] in_nib = '0;
  logic out_valid, out_ready = 0, empty;
  logic [127:0] out_line;
  int checks = 0, failures = 0;

  write_combine_buffer #(.IN_N(16)) dut (.*);

  logic [3:0] q [$];          // nibbles not yet in a predicted line
  logic [128:0] exp_lines [$];// {last, line}
  int beats = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  always @(negedge clk) if (rst_n) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [128:0] e;
    checks++;
    if (exp_lines.size() == 0) begin failures++; $display("FAIL unexpected line"); end
    else begin
      e = exp_lines.pop_front();
      if (out_line !== e[127:0]) begin
        failures++;
        if (failures < 10) $display("FAIL line %h exp %h", out_line, e[127:0]);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (beats < 3000) begin
      @(negedge clk);
      if (!in_valid && $urandom_range(4) != 0) begin
        int c;
        c = ($urandom_range(9) == 0) ? 0 : $urandom_range(16);
        in_count = 5'(c);
        in_nib = {$urandom, $urandom};
        in_flush = ($urandom_range(5) == 0);
        in_valid = 1;
        for (int i = 0; i < c; i++) q.push_back(in_nib[i*4 +: 4]);
        while (q.size() >= 32) begin
          logic [127:0] l;
          for (int i = 0; i < 32; i++) l[i*4 +: 4] = q.pop_front();
          exp_lines.push_back({(in_flush && q.size() == 0), l});
        end
        if (in_flush && q.size() > 0) begin
          logic [127:0] l;
          l = '0;
          for (int i = 0; q.size() > 0; i++) l[i*4 +: 4] = q.pop_front();
          exp_lines.push_back({1'b1, l});
        end
      end
      // a beat seen with in_ready at the falling edge is taken at the next rising edge
      if (in_valid && in_ready) begin
        @(posedge clk); #1;
        in_valid = 0;
        beats++;
      end
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (exp_lines.size() != 0) begin failures++; $display("FAIL %0d lines missing", exp_lines.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
