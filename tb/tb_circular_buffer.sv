// tb_circular_buffer: random push/pop traffic (never pushing when full or
// popping when empty, as the load unit does) against a queue model; checks
// head line, tag, count, full and empty every cycle, and wrap-around.
module tb_circular_buffer;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [127:0] push_line = '0, head_line;
  logic [3:0] push_tag = '0, head_tag;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  circular_buffer #(.DEPTH(D), .TAG_W(4)) dut (.*);

  logic [131:0] q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || full != (q.size() == D) || empty != (q.size() == 0) ||
          (q.size() > 0 && {head_tag, head_line} !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d count=%0d exp=%0d", t, count, q.size());
      end
      push = !full && ($urandom_range(99) < ((t / 1000) % 2 ? 70 : 35));
      pop  = !empty && ($urandom_range(99) < 50);
      push_line = {$urandom, $urandom, $urandom, $urandom};
      push_tag  = 4'($urandom);
      @(posedge clk); #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back({push_tag, push_line});
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
