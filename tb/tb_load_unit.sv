// tb_load_unit: a behavioural SRAM with random bank-conflict stalls (grant
// withheld) and one-cycle reads serves a compressed activation tensor and a
// weight tensor laid out as the accelerator stores them. For several random
// (m0, n0, kt) commands it runs the dense load then the sparse load and checks
// every PE-row write (LSB4, PBM, compressed MSB4 of that 32-channel group),
// every PE-column FL write, and that the sparse load fetched exactly the MSB4
// lines the PBM calls for (none for a group without non-zero MSB4).
module tb_load_unit;
  import sparqle_pkg::*;
  localparam int M = 48, K = 256, N = 256;
  localparam int X_LSB = 0, X_PBM = 2000, X_MSB = 3000, W_B = 8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_desc_t desc;
  logic start = 0, mode_sparse = 0, busy, done;
  logic [15:0] m0 = '0, n0 = '0, kt = '0;
  logic if_req, if_gnt, if_rvalid, fl_req, fl_gnt, fl_rvalid;
  addr_t if_addr, fl_addr;
  line_t if_rdata, fl_rdata;
  logic [$clog2(N_ROWS)-1:0] pe_if_row;
  logic pe_lsb_we, pe_pbm_we, pe_msb_we, pe_fl_we, msb_lines_skipped;
  logic [KT*4-1:0] pe_lsb_wdata, pe_msb_wdata, pe_fl_wdata;
  logic [KT-1:0] pe_pbm_wdata;
  logic [$clog2(N_COLS)-1:0] pe_fl_col;
  logic [$clog2(OCS)-1:0] pe_fl_sel;
  int checks = 0, failures = 0;

  load_unit dut (.*);

  line_t mem [int];
  logic signed [7:0] X [M][K];
  logic [3:0] W [N][K];
  int msb_reads = 0;

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // behavioural SRAM ports with random stalls
  int stall_if = 0, stall_fl = 0;
  assign if_gnt = if_req && stall_if == 0;
  assign fl_gnt = fl_req && stall_fl == 0;
  always @(negedge clk) begin stall_if = $urandom_range(3) == 0; stall_fl = $urandom_range(3) == 0; end
  always_ff @(posedge clk) begin
    if_rvalid <= if_gnt;
    fl_rvalid <= fl_gnt;
    if (if_gnt) begin
      if_rdata <= mem.exists(int'(if_addr)) ? mem[int'(if_addr)] : '0;
      if (int'(if_addr) >= X_MSB && int'(if_addr) < W_B) msb_reads++;
    end
    if (fl_gnt) fl_rdata <= mem.exists(int'(fl_addr)) ? mem[int'(fl_addr)] : '0;
  end

  // PE-side record
  logic [KT*4-1:0] got_lsb [N_ROWS], got_msb [N_ROWS], got_fl [N_COLS*OCS];
  logic [KT-1:0]   got_pbm [N_ROWS];
  int n_if, n_fl;
  always @(posedge clk) begin
    if (pe_lsb_we) begin got_lsb[pe_if_row] <= pe_lsb_wdata; n_if++; end
    if (pe_msb_we) begin got_msb[pe_if_row] <= pe_msb_wdata; n_if++; end
    if (pe_pbm_we) got_pbm[pe_if_row] <= pe_pbm_wdata;
    if (pe_fl_we) begin got_fl[int'(pe_fl_col) * OCS + int'(pe_fl_sel)] <= pe_fl_wdata; n_fl++; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l;
    // tensors and layout
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) begin
      int r;
      r = $urandom_range(99);
      X[m][k] = (m % 5 == 2 || r < 60) ? 8'($urandom_range(15)) : 8'($urandom);
    end
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) W[n][k] = 4'($urandom);
    for (int m = 0; m < M; m++) begin
      for (int g = 0; g < K / 32; g++) begin
        for (int j = 0; j < 32; j++) l[j*4 +: 4] = X[m][g*32+j][3:0];
        mem[X_LSB + m * K / 32 + g] = l;
      end
      for (int g = 0; g < K / 128; g++) begin
        logic [511:0] slot;
        int p;
        l = '0; slot = '0; p = 0;
        for (int c = 0; c < 128; c++)
          if (X[m][g*128+c][7:4] != 0) begin l[c] = 1; slot[p*4 +: 4] = X[m][g*128+c][7:4]; p++; end
        mem[X_PBM + m * K / 128 + g] = l;
        for (int i = 0; i < 4; i++) mem[X_MSB + 4 * (m * K / 128 + g) + i] = slot[i*128 +: 128];
      end
    end
    for (int n = 0; n < N; n++) for (int g = 0; g < K / 32; g++) begin
      for (int j = 0; j < 32; j++) l[j*4 +: 4] = W[n][g*32+j];
      mem[W_B + n * K / 32 + g] = l;
    end
    desc = '0;
    desc.m = 16'(M); desc.k = 16'(K); desc.n = 16'(N);
    desc.x_lsb_base = addr_t'(X_LSB); desc.x_pbm_base = addr_t'(X_PBM);
    desc.x_msb_base = addr_t'(X_MSB); desc.w_base = addr_t'(W_B);

    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cmd = 0; cmd < 12; cmd++) begin
      int cm0, cn0, ckt, exp_msb;
      cm0 = 16 * (cmd % (M / 16)); cn0 = 128 * ($urandom_range(N / 128 - 1)); ckt = $urandom_range(K / 32 - 1);
      // dense load
      n_if = 0; n_fl = 0;
      @(negedge clk);
      m0 = 16'(cm0); n0 = 16'(cn0); kt = 16'(ckt); mode_sparse = 0; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check(n_if == N_ROWS && n_fl == N_COLS * OCS, $sformatf("dense write counts %0d %0d", n_if, n_fl));
      for (int r = 0; r < N_ROWS; r++)
        for (int j = 0; j < 32; j++)
          check(got_lsb[r][j*4 +: 4] == X[cm0 + r][ckt*32 + j][3:0], $sformatf("lsb r%0d j%0d", r, j));
      for (int f = 0; f < N_COLS * OCS; f++)
        for (int j = 0; j < 32; j++)
          check(got_fl[f][j*4 +: 4] == W[cn0 + f][ckt*32 + j], $sformatf("fl %0d j%0d", f, j));
      // sparse load
      n_if = 0; msb_reads = 0; exp_msb = 0;
      @(negedge clk);
      mode_sparse = 1; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check(n_if == N_ROWS, "sparse write count");
      for (int r = 0; r < N_ROWS; r++) begin
        int p, off, cnt;
        p = 0; off = 0; cnt = 0;
        for (int c = 0; c < (ckt % 4) * 32; c++) if (X[cm0 + r][(ckt / 4) * 128 + c][7:4] != 0) off++;
        for (int j = 0; j < 32; j++) begin
          logic [3:0] hi;
          hi = X[cm0 + r][ckt*32 + j][7:4];
          check(got_pbm[r][j] == (hi != 0), $sformatf("pbm r%0d j%0d", r, j));
          if (hi != 0) begin
            check(got_msb[r][p*4 +: 4] == hi, $sformatf("msb r%0d p%0d", r, p));
            p++;
          end
        end
        for (int q = p; q < 32; q++) check(got_msb[r][q*4 +: 4] == 0, "msb tail zero");
        cnt = p;
        if (cnt > 0) exp_msb += (off + cnt - 1) / 32 - off / 32 + 1;
      end
      check(msb_reads == exp_msb, $sformatf("msb line reads %0d exp %0d", msb_reads, exp_msb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
