// tb_sparqle_ctrl: the load unit, PE array and drain unit are replaced by
// responders with random latencies. The controller's command stream is
// compared with the expected schedule for a 32x256x256 layer:
//   per (mt, nt): clear; per kt: dense load(m0, n0, kt), dense pass together
//   with sparse load, sparse pass; then drain(m0, nt); done at the end.
// Also checks that the sparse pass never starts before both the dense pass
// and the sparse load have finished, and that done pulses once.
// A second run in Int4-activation mode with M = 20 expects two token tiles
// with only dense loads and dense passes.
module tb_sparqle_ctrl;
  import sparqle_pkg::*;
  localparam int M = 32, K = 256, N = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_desc_t desc;
  logic start = 0, busy, done;
  logic ld_start, ld_sparse, ld_done = 0;
  logic [15:0] ld_m0, ld_n0, ld_kt, dr_m0, dr_nt;
  logic of_clear, start_dense, start_sparse, array_busy = 0;
  logic dr_start, dr_done = 0;
  logic in_dense, in_sparse, in_load_wait, in_drain, in_overlap;
  int checks = 0, failures = 0;

  sparqle_ctrl dut (.*);

  string got [$];
  int ld_left = 0, arr_left = 0, dr_left = 0;
  bit sparse_load_pending = 0, dense_running = 0;

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // responders (drive after the falling edge)
  always @(negedge clk) begin
    ld_done = 0; dr_done = 0;
    if (ld_left > 0) begin ld_left--; if (ld_left == 0) begin ld_done = 1; sparse_load_pending = 0; end end
    if (arr_left > 0) begin arr_left--; if (arr_left == 0) dense_running = 0; end
    array_busy = (arr_left > 0);
    if (dr_left > 0) begin dr_left--; if (dr_left == 0) dr_done = 1; end
  end
  always @(posedge clk) if (rst_n) begin
    if (of_clear) got.push_back("clr");
    if (ld_start) begin
      got.push_back($sformatf("ld%0d %0d %0d %0d", ld_sparse, ld_m0, ld_n0, ld_kt));
      ld_left = $urandom_range(40, 1);
      if (ld_sparse) sparse_load_pending = 1;
    end
    if (start_dense) begin got.push_back("dense"); arr_left = 33; dense_running = 1; end
    if (start_sparse) begin
      got.push_back("sparse");
      check(!sparse_load_pending && !dense_running, "sparse pass started early");
      arr_left = $urandom_range(33);
    end
    if (dr_start) begin got.push_back($sformatf("drain %0d %0d", dr_m0, dr_nt)); dr_left = $urandom_range(30, 1); end
    if (done) got.push_back("done");
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string exp [$];
    desc = '0;
    desc.m = 16'(M); desc.k = 16'(K); desc.n = 16'(N);
    for (int mt = 0; mt < M / 16; mt++)
      for (int nt = 0; nt < N / 128; nt++) begin
        exp.push_back("clr");
        for (int kt = 0; kt < K / 32; kt++) begin
          exp.push_back($sformatf("ld0 %0d %0d %0d", mt * 16, nt * 128, kt));
          exp.push_back($sformatf("ld1 %0d %0d %0d", mt * 16, nt * 128, kt));
          exp.push_back("dense");
          exp.push_back("sparse");
        end
        exp.push_back($sformatf("drain %0d %0d", mt * 16, nt));
      end
    exp.push_back("done");
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(!busy, "idle after done");
    check(got.size() == exp.size(), $sformatf("event count %0d exp %0d", got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("event %0d '%s' exp '%s'", i, got[i], exp[i]));

    // Int4-activation mode with a partial last token tile (M = 20):
    // dense load and dense pass only, two token tiles.
    got.delete();
    exp.delete();
    desc.m = 16'd20; desc.a4 = 1'b1;
    for (int mt = 0; mt < 2; mt++)
      for (int nt = 0; nt < N / 128; nt++) begin
        exp.push_back("clr");
        for (int kt = 0; kt < K / 32; kt++) begin
          exp.push_back($sformatf("ld0 %0d %0d %0d", mt * 16, nt * 128, kt));
          exp.push_back("dense");
        end
        exp.push_back($sformatf("drain %0d %0d", mt * 16, nt));
      end
    exp.push_back("done");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    check(got.size() == exp.size(), $sformatf("A4 event count %0d exp %0d", got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("A4 event %0d '%s' exp '%s'", i, got[i], exp[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
