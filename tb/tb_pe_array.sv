// tb_pe_array: a reduced 4x4 array (same PE). Activation rows are written
// per PE row, weight rows per PE column; after a dense and a sparse pass the
// drain multiplexer must show, for token r and channel n, the exact product
// sum_c X[r][c]*W[n][c]. The busy time of the sparse pass must be that of the
// densest row, OCS*ceil(max nnz/MACS), and all-[0,15] rows must report a skip.
module tb_pe_array;
  localparam int R = 4, C = 4, KT = 32, OCS = 8, MACS = 8, DL = 16;
  localparam int NCH = C * OCS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [$clog2(R)-1:0] if_row = '0, drain_row = '0;
  logic lsb_we = 0, pbm_we = 0, msb_we = 0, fl_we = 0;
  logic [KT*4-1:0] lsb_wdata = '0, msb_wdata = '0, fl_wdata = '0;
  logic [KT-1:0] pbm_wdata = '0;
  logic [$clog2(C)-1:0] fl_col = '0;
  logic [$clog2(OCS)-1:0] fl_sel = '0;
  logic of_clear = 0, start_dense = 0, start_sparse = 0, busy;
  logic [R-1:0] row_skipped;
  logic [$clog2(NCH/DL)-1:0] drain_beat = '0;
  logic signed [31:0] drain_data [DL];
  int checks = 0, failures = 0;

  logic a_signed = 1'b0;
  pe_array #(.N_ROWS(R), .N_COLS(C), .KT(KT), .OCS(OCS), .MACS(MACS), .DL(DL)) dut (.*);

  logic signed [7:0] X [R][KT];
  logic signed [3:0] W [NCH][KT];

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int maxnz, cyc;
      logic [R-1:0] skips;
      maxnz = 0;
      for (int r = 0; r < R; r++) begin
        int d;
        d = (r == round % R) ? 0 : $urandom_range(100);
        for (int c = 0; c < KT; c++) X[r][c] = ($urandom_range(99) < d) ? 8'($urandom) : 8'($urandom_range(15));
      end
      for (int n = 0; n < NCH; n++) for (int c = 0; c < KT; c++) W[n][c] = 4'($urandom);
      @(negedge clk); of_clear = 1; @(negedge clk); of_clear = 0;
      for (int r = 0; r < R; r++) begin
        int p;
        p = 0; msb_wdata = '0;
        for (int c = 0; c < KT; c++) begin
          lsb_wdata[c*4 +: 4] = X[r][c][3:0];
          pbm_wdata[c] = (X[r][c][7:4] != 0);
          if (pbm_wdata[c]) begin msb_wdata[p*4 +: 4] = X[r][c][7:4]; p++; end
        end
        if (p > maxnz) maxnz = p;
        if_row = 2'(r); lsb_we = 1; pbm_we = 1; msb_we = 1;
        @(negedge clk);
      end
      lsb_we = 0; pbm_we = 0; msb_we = 0;
      for (int n = 0; n < NCH; n++) begin
        fl_col = 2'(n / OCS); fl_sel = 3'(n % OCS); fl_we = 1;
        for (int c = 0; c < KT; c++) fl_wdata[c*4 +: 4] = W[n][c];
        @(negedge clk);
      end
      fl_we = 0;
      start_dense = 1; @(negedge clk); start_dense = 0;
      cyc = 0;
      while (busy) begin cyc++; @(negedge clk); end
      check(cyc == OCS * KT / MACS, $sformatf("dense cycles %0d", cyc));
      start_sparse = 1; @(negedge clk); start_sparse = 0;
      skips = row_skipped;
      cyc = 0;
      while (busy) begin cyc++; @(negedge clk); end
      check(cyc == OCS * ((maxnz + MACS - 1) / MACS), $sformatf("sparse cycles %0d maxnz %0d", cyc, maxnz));
      check(skips[round % R] == 1'b1, "skip of all-small row");
      for (int r = 0; r < R; r++)
        for (int b = 0; b < NCH / DL; b++) begin
          drain_row = 2'(r); drain_beat = 1'(b);
          #1;
          for (int i = 0; i < DL; i++) begin
            int e, n;
            n = b * DL + i; e = 0;
            for (int c = 0; c < KT; c++) e += int'(X[r][c]) * int'(W[n][c]);
            check(drain_data[i] == e, $sformatf("out r=%0d n=%0d got %0d exp %0d", r, n, drain_data[i], e));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
