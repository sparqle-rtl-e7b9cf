// tb_hybrid_pe: loads random LSB4 rows, PBM rows of varying density with the
// matching compressed MSB4 rows, and random Int4 weights; runs a dense and a
// sparse pass per round (accumulating over several rounds) and checks
// - every OF accumulator against sum_c x[c]*w[o][c] with x = 16*MSB4+LSB4,
// - busy lasting OCS*KT/MACS cycles for the dense pass and
//   OCS*ceil(nnz/MACS) for the sparse pass (0 and a skip pulse when nnz=0).
// A final set of rounds runs in Int4-activation mode (signed LSB4, dense
// pass only).
module tb_hybrid_pe;
  localparam int KT = 32, OCS = 8, MACS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_signed = 0;
  logic lsb_we = 0, pbm_we = 0, msb_we = 0, fl_we = 0;
  logic [KT*4-1:0] lsb_wdata = '0, msb_wdata = '0, fl_wdata = '0;
  logic [KT-1:0] pbm_wdata = '0;
  logic [$clog2(OCS)-1:0] fl_wsel = '0;
  logic of_clear = 0, start_dense = 0, start_sparse = 0, busy, sparse_skipped;
  logic signed [31:0] of_out [OCS];
  int checks = 0, failures = 0;

  hybrid_pe #(.KT(KT), .OCS(OCS), .MACS(MACS)) dut (.*);

  logic signed [7:0] x [KT];
  logic signed [3:0] w [OCS][KT];
  longint exp_of [OCS];

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic run_pass(input bit sparse, output int cyc, output bit skipped);
    @(negedge clk);
    if (sparse) start_sparse = 1; else start_dense = 1;
    @(negedge clk);
    start_sparse = 0; start_dense = 0;
    skipped = sparse_skipped;
    cyc = 0;
    while (busy) begin cyc++; @(negedge clk); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      int dens, nnz, p, cyc;
      bit sk;
      if (round % 10 == 0) begin
        @(negedge clk); of_clear = 1; @(negedge clk); of_clear = 0;
        for (int o = 0; o < OCS; o++) exp_of[o] = 0;
      end
      dens = (round % 7 == 3) ? 0 : (round % 7 == 4) ? 100 : $urandom_range(100);
      for (int c = 0; c < KT; c++)
        x[c] = ($urandom_range(99) < dens) ? 8'($urandom_range(255)) : 8'($urandom_range(15));
      for (int o = 0; o < OCS; o++) for (int c = 0; c < KT; c++) w[o][c] = 4'($urandom);
      // RF writes
      @(negedge clk);
      nnz = 0; p = 0; msb_wdata = '0;
      for (int c = 0; c < KT; c++) begin
        lsb_wdata[c*4 +: 4] = x[c][3:0];
        pbm_wdata[c] = (x[c][7:4] != 0);
        if (pbm_wdata[c]) begin msb_wdata[p*4 +: 4] = x[c][7:4]; p++; end
      end
      nnz = p;
      lsb_we = 1; pbm_we = 1; msb_we = 1;
      @(negedge clk);
      lsb_we = 0; pbm_we = 0; msb_we = 0;
      for (int o = 0; o < OCS; o++) begin
        fl_we = 1; fl_wsel = 3'(o);
        for (int c = 0; c < KT; c++) fl_wdata[c*4 +: 4] = w[o][c];
        @(negedge clk);
      end
      fl_we = 0;
      for (int o = 0; o < OCS; o++)
        for (int c = 0; c < KT; c++) exp_of[o] += longint'(x[c]) * longint'(w[o][c]);
      run_pass(0, cyc, sk);
      check(cyc == OCS * KT / MACS, $sformatf("dense cycles %0d", cyc));
      run_pass(1, cyc, sk);
      check(cyc == OCS * ((nnz + MACS - 1) / MACS), $sformatf("sparse cycles %0d nnz %0d", cyc, nnz));
      check(sk == (nnz == 0), "skip pulse");
      for (int o = 0; o < OCS; o++)
        check(longint'(of_out[o]) == exp_of[o], $sformatf("round %0d OF[%0d]=%0d exp %0d", round, o, of_out[o], exp_of[o]));
    end
    // Int4-activation mode: signed LSB4, one dense round, no sparse round
    @(negedge clk); of_clear = 1; a_signed = 1; @(negedge clk); of_clear = 0;
    for (int o = 0; o < OCS; o++) exp_of[o] = 0;
    for (int round = 0; round < 10; round++) begin
      int cyc;
      bit sk;
      @(negedge clk);
      for (int c = 0; c < KT; c++) begin
        x[c] = 8'($signed(4'($urandom)));
        lsb_wdata[c*4 +: 4] = x[c][3:0];
      end
      lsb_we = 1;
      for (int o = 0; o < OCS; o++) begin
        fl_we = 1; fl_wsel = 3'(o);
        for (int c = 0; c < KT; c++) begin
          w[o][c] = 4'($urandom);
          fl_wdata[c*4 +: 4] = w[o][c];
        end
        @(negedge clk);
        lsb_we = 0;
      end
      fl_we = 0;
      for (int o = 0; o < OCS; o++)
        for (int c = 0; c < KT; c++) exp_of[o] += longint'(x[c]) * longint'(w[o][c]);
      run_pass(0, cyc, sk);
      check(cyc == OCS * KT / MACS, $sformatf("A4 dense cycles %0d", cyc));
      for (int o = 0; o < OCS; o++)
        check(longint'(of_out[o]) == exp_of[o], $sformatf("A4 round %0d OF[%0d]=%0d exp %0d", round, o, of_out[o], exp_of[o]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
