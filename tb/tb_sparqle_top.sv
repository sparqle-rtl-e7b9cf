// tb_sparqle_top: end-to-end test of the accelerator at its default size.
//
// Builds a random layer X[M][K] (Int8, mostly near zero, one token whose
// activations all lie in [0,15]) and W[K][N] (Int4), stores X in the
// compressed LSB4/PBM/MSB4 layout and W through the host port, runs the
// layer, reads the compressed output back, rebuilds the Int8 outputs and
// compares them with a reference computed here:
//   y = clip(sat8((sum_k X*W) >>> shift)) using the column-importance mask.
// It also checks the dense-pass and sparse-pass cycle counts against the
// formulas OCS*KT/MACS and max over rows of OCS*ceil(nnz/MACS), and that
// every mechanism (dense pass, sparse pass, skipped sparse pass, MSB4-free
// group, clip, saturation, bank conflict, load/compute overlap) happened.
// M = 40 leaves the last token tile half full; guard lines after the output
// must survive the run. A second run uses the same weights in Int4-activation
// mode (signed Int4 X, LSB4 lines only) and checks y = sat4(acc >>> shift),
// the dense cycle count and that no sparse round ran.
module tb_sparqle_top;
  import sparqle_pkg::*;

  localparam int M = 40;                 // last token tile only half full
  localparam int K = 256;
  localparam int N = 256;
  localparam int WATCHDOG = 200000;

  localparam int X_LSB = 0;
  localparam int X_PBM = X_LSB + M * K / 32;
  localparam int X_MSB = X_PBM + M * K / 128;
  localparam int W_B   = X_MSB + 4 * M * K / 128;
  localparam int O_LSB = W_B + N * K / 32;
  localparam int O_PBM = O_LSB + M * N / 32;
  localparam int O_MSB = O_PBM + M * N / 128;
  localparam int SENT  = O_MSB + 4 * M * N / 128;   // guard lines after the output
  localparam int MT    = (M + 15) / 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_desc_t desc;
  logic start = 0, busy, done;
  logic host_req = 0, host_we = 0, host_gnt, host_rvalid;
  addr_t host_addr = '0;
  line_t host_wdata = '0, host_rdata;
  logic mask_we = 0;
  logic [$clog2(MAX_CH/16)-1:0] mask_addr = '0;
  logic [15:0] mask_wdata = '0;
  perf_t perf;

  sparqle_top dut (.*);

  int checks = 0, failures = 0;
  logic signed [7:0] X [M][K];
  logic signed [3:0] W [K][N];
  logic              cmask [N];
  logic signed [7:0] Y [M][N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Host port: drive after the falling edge, sample grant/read data there.
  task automatic host_write(input int a, input line_t d);
    @(negedge clk);
    host_req = 1; host_we = 1; host_addr = addr_t'(a); host_wdata = d;
    while (!host_gnt) @(negedge clk);
    @(posedge clk); #1;
    host_req = 0; host_we = 0;
  endtask

  task automatic host_read(input int a, output line_t d);
    @(negedge clk);
    host_req = 1; host_we = 0; host_addr = addr_t'(a);
    while (!host_gnt) @(negedge clk);
    @(posedge clk); #1;
    host_req = 0;
    @(negedge clk);
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  function automatic logic signed [7:0] gen_x(input int m);
    int r, v;
    r = $urandom_range(99);
    if (m == 3 || r < 50) v = $urandom_range(15);
    else if (r < 70) v = -$urandom_range(8, 1);
    else if (r < 94) v = ($urandom_range(1) ? 1 : -1) * $urandom_range(60, 16);
    else v = ($urandom_range(1) ? 1 : -1) * $urandom_range(127, 61);
    return 8'(v);
  endfunction

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l;
    int exp_dense, exp_sparse;
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) X[m][k] = gen_x(m);
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) W[k][n] = 4'($urandom_range(15));
    for (int n = 0; n < N; n++) cmask[n] = $urandom_range(1);

    desc = '0;
    desc.m = 16'(M); desc.k = 16'(K); desc.n = 16'(N);
    desc.x_lsb_base = addr_t'(X_LSB); desc.x_pbm_base = addr_t'(X_PBM);
    desc.x_msb_base = addr_t'(X_MSB); desc.w_base = addr_t'(W_B);
    desc.o_lsb_base = addr_t'(O_LSB); desc.o_pbm_base = addr_t'(O_PBM);
    desc.o_msb_base = addr_t'(O_MSB);
    desc.shift = 5'd5; desc.clip_l = -8'sd5; desc.clip_h = 8'sd20;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- store X: LSB4 lines, PBM lines, MSB4 slots -------------------------
    for (int m = 0; m < M; m++) begin
      for (int kt = 0; kt < K / 32; kt++) begin
        l = '0;
        for (int j = 0; j < 32; j++) l[j*4 +: 4] = X[m][kt*32+j][3:0];
        host_write(X_LSB + m * K / 32 + kt, l);
      end
      for (int g = 0; g < K / 128; g++) begin
        logic [511:0] slot;
        int p;
        l = '0; slot = '0; p = 0;
        for (int c = 0; c < 128; c++) begin
          logic [3:0] hi;
          hi = X[m][g*128+c][7:4];
          if (hi != 0) begin
            l[c] = 1'b1;
            slot[p*4 +: 4] = hi;
            p++;
          end
        end
        host_write(X_PBM + m * K / 128 + g, l);
        for (int i = 0; i < 4; i++) host_write(X_MSB + 4 * (m * K / 128 + g) + i, slot[i*128 +: 128]);
      end
    end
    // ---- store W: one line per (output channel, 32-channel group) -----------
    for (int n = 0; n < N; n++)
      for (int kt = 0; kt < K / 32; kt++) begin
        l = '0;
        for (int j = 0; j < 32; j++) l[j*4 +: 4] = W[kt*32+j][n];
        host_write(W_B + n * K / 32 + kt, l);
      end
    // ---- column-importance mask -----------------------------------------------
    for (int w = 0; w < N / 16; w++) begin
      @(negedge clk);
      mask_we = 1; mask_addr = ($clog2(MAX_CH/16))'(w);
      for (int i = 0; i < 16; i++) mask_wdata[i] = cmask[w*16+i];
    end
    @(negedge clk);
    mask_we = 0;

    // ---- reference -------------------------------------------------------------
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        int acc, s;
        acc = 0;
        for (int k = 0; k < K; k++) acc += int'(X[m][k]) * int'(W[k][n]);
        s = acc >>> 5;
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        if (cmask[n]) begin
          if (s >= -5 && s < 0) s = 0;
          else if (s > 15 && s <= 20) s = 15;
        end
        Y[m][n] = 8'(s);
      end
    exp_dense = MT * (N / 128) * (K / 32) * (OCS * KT / MACS);
    exp_sparse = 0;
    for (int mt = 0; mt < MT; mt++)
      for (int kt = 0; kt < K / 32; kt++) begin
        int worst;
        worst = 0;
        for (int r = 0; r < 16; r++) begin
          int nz;
          int t;
          nz = 0;
          t = (mt * 16 + r < M) ? mt * 16 + r : M - 1;   // rows past M repeat the last token
          for (int j = 0; j < 32; j++) if (X[t][kt*32+j][7:4] != 0) nz++;
          if (OCS * ((nz + MACS - 1) / MACS) > worst) worst = OCS * ((nz + MACS - 1) / MACS);
        end
        exp_sparse += worst * (N / 128);
      end

    // ---- guard lines right after the output: rows past M must not be written
    for (int i = 0; i < 64; i++) host_write(SENT + i, {4{32'hA5C3_0000 + 32'(i)}});

    // ---- run ---------------------------------------------------------------------
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);

    // ---- read back and compare --------------------------------------------------------
    for (int m = 0; m < M; m++)
      for (int g = 0; g < N / 128; g++) begin
        line_t pb;
        logic [511:0] slot;
        logic [127:0] lsbs [4];
        int p;
        host_read(O_PBM + m * N / 128 + g, pb);
        for (int i = 0; i < 4; i++) host_read(O_LSB + m * N / 32 + g * 4 + i, lsbs[i]);
        slot = '0;
        for (int i = 0; i < 4; i++) begin
          host_read(O_MSB + 4 * (m * N / 128 + g) + i, l);
          slot[i*128 +: 128] = l;
        end
        p = 0;
        for (int c = 0; c < 128; c++) begin
          logic [7:0] y;
          int n;
          n = g * 128 + c;
          y[3:0] = lsbs[c / 32][(c % 32) * 4 +: 4];
          y[7:4] = 4'h0;
          if (pb[c]) begin
            y[7:4] = slot[p*4 +: 4];
            p++;
            check(y[7:4] != 0, $sformatf("PBM set for zero MSB4 m=%0d n=%0d", m, n));
          end
          check(y == Y[m][n], $sformatf("OUT m=%0d n=%0d got %0d exp %0d", m, n,
                                        $signed(y), Y[m][n]));
        end
      end

    for (int i = 0; i < 64; i++) begin
      host_read(SENT + i, l);
      check(l == {4{32'hA5C3_0000 + 32'(i)}}, $sformatf("guard line %0d overwritten", i));
    end

    $display("perf: cycles=%0d dense=%0d sparse=%0d load_wait=%0d drain=%0d overlap=%0d",
             perf.cycles, perf.dense_cycles, perf.sparse_cycles, perf.load_wait_cycles,
             perf.drain_cycles, perf.overlap_cycles);
    $display("events: row_skips=%0d msb_group_skips=%0d clipped=%0d saturated=%0d bank_conflicts=%0d drain_stalls=%0d",
             perf.sparse_row_skips, perf.msb_group_skips, perf.clipped, perf.saturated,
             perf.bank_conflicts, perf.drain_stalls);
    check(perf.dense_cycles == 32'(exp_dense),
          $sformatf("dense cycles %0d exp %0d", perf.dense_cycles, exp_dense));
    check(perf.sparse_cycles == 32'(exp_sparse),
          $sformatf("sparse cycles %0d exp %0d", perf.sparse_cycles, exp_sparse));
    check(perf.sparse_row_skips > 0, "no skipped sparse pass");
    check(perf.msb_group_skips > 0, "no MSB4-free token group");
    check(perf.clipped > 0, "no clipping happened");
    check(perf.saturated > 0, "no saturation happened");
    check(perf.bank_conflicts > 0, "no bank conflict happened");
    check(perf.overlap_cycles > 0, "sparse load never overlapped the dense pass");

    // ---- second layer: Int4 activations (one dense round, LSB4 lines only) -----
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) X[m][k] = 8'($signed(4'($urandom)));
    for (int m = 0; m < M; m++)
      for (int kt = 0; kt < K / 32; kt++) begin
        l = '0;
        for (int j = 0; j < 32; j++) l[j*4 +: 4] = X[m][kt*32+j][3:0];
        host_write(X_LSB + m * K / 32 + kt, l);
      end
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        int acc, s;
        acc = 0;
        for (int k = 0; k < K; k++) acc += int'(X[m][k]) * int'(W[k][n]);
        s = acc >>> 6;
        if (s > 7) s = 7;
        if (s < -8) s = -8;
        Y[m][n] = 8'(s);
      end
    desc.a4 = 1'b1; desc.shift = 5'd6;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    for (int m = 0; m < M; m++)
      for (int nl = 0; nl < N / 32; nl++) begin
        host_read(O_LSB + m * N / 32 + nl, l);
        for (int c = 0; c < 32; c++)
          check(8'($signed(l[c*4 +: 4])) == Y[m][nl*32+c],
                $sformatf("A4 OUT m=%0d n=%0d got %0d exp %0d", m, nl * 32 + c,
                          $signed(l[c*4 +: 4]), Y[m][nl*32+c]));
      end
    $display("int4 run: cycles=%0d dense=%0d sparse=%0d saturated=%0d",
             perf.cycles, perf.dense_cycles, perf.sparse_cycles, perf.saturated);
    check(perf.dense_cycles == 32'(exp_dense), "A4 dense cycles");
    check(perf.sparse_cycles == 0, "A4 run used a sparse round");
    check(perf.saturated > 0, "A4 run never saturated to Int4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
