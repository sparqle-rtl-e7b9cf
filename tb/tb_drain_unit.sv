// tb_drain_unit: presents a random tile of Int32 accumulators on the drain
// port, grants the three SRAM write requesters with random stalls, collects
// the written lines and rebuilds the Int8 outputs from LSB4, PBM and MSB4
// lines. Checks them against requant + clip computed here with the
// column-importance mask, checks that each token row wrote exactly
// ceil(nnz/32) MSB4 lines (none for a row without non-zero MSB4) and that
// every write went to its expected address range.
module tb_drain_unit;
  import sparqle_pkg::*;
  localparam int N = 256, M0 = 16, NT = 1, SH = 4;
  localparam int O_LSB = 1000, O_PBM = 3000, O_MSB = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_desc_t desc;
  logic start = 0, busy, done;
  logic [15:0] m0 = '0, nt = '0;
  logic mask_we = 0;
  logic [$clog2(MAX_CH/16)-1:0] mask_addr = '0;
  logic [15:0] mask_wdata = '0;
  logic [$clog2(N_ROWS)-1:0] drain_row;
  logic [$clog2(NT_CH/DRAIN_LANES)-1:0] drain_beat;
  logic signed [31:0] drain_data [DRAIN_LANES];
  logic [2:0] wr_req, wr_gnt;
  addr_t wr_addr [3];
  line_t wr_wdata [3];
  logic [4:0] stat_clipped, stat_saturated;
  logic stat_stall;
  int checks = 0, failures = 0;

  drain_unit dut (.*);

  logic signed [31:0] ACC [N_ROWS][NT_CH];
  logic cm [N];
  line_t mem [int];
  int stalls = 0, clips = 0, tot = 0;

  always_comb for (int i = 0; i < DRAIN_LANES; i++)
    drain_data[i] = ACC[drain_row][int'(drain_beat) * DRAIN_LANES + i];

  logic [2:0] stall;
  always @(negedge clk) stall = 3'($urandom_range(7)) & 3'($urandom_range(7));
  assign wr_gnt = wr_req & ~stall;
  always @(posedge clk) begin
    for (int s = 0; s < 3; s++) if (rst_n && wr_gnt[s]) mem[int'(wr_addr[s])] = wr_wdata[s];
    if (stat_stall) stalls++;
    clips += int'(stat_clipped);
  end

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
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < NT_CH; c++)
        ACC[r][c] = (r == 5) ? $urandom_range(15 << SH) : $signed($urandom_range(5000)) - 2500;
    for (int n = 0; n < N; n++) cm[n] = $urandom_range(1);
    desc = '0;
    desc.m = 16'(M0 + N_ROWS);
    desc.n = 16'(N); desc.o_lsb_base = addr_t'(O_LSB); desc.o_pbm_base = addr_t'(O_PBM);
    desc.o_msb_base = addr_t'(O_MSB); desc.shift = 5'(SH); desc.clip_l = -8'sd6; desc.clip_h = 8'sd25;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < N / 16; w++) begin
      mask_we = 1; mask_addr = 10'(w);
      for (int i = 0; i < 16; i++) mask_wdata[i] = cm[w*16+i];
      @(negedge clk);
    end
    mask_we = 0;
    m0 = 16'(M0); nt = 16'(NT); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    tot = 0;
    for (int r = 0; r < N_ROWS; r++) begin
      int m, g, p, nnz, nlines;
      line_t pb;
      logic [511:0] slot;
      m = M0 + r; g = m * N / 128 + NT;
      pb = mem.exists(O_PBM + g) ? mem[O_PBM + g] : 'x;
      check(mem.exists(O_PBM + g), "pbm line written");
      slot = '0; nlines = 0;
      for (int i = 0; i < 4; i++) if (mem.exists(O_MSB + 4 * g + i)) begin
        slot[i*128 +: 128] = mem[O_MSB + 4 * g + i]; nlines++;
      end
      p = 0; nnz = 0;
      for (int c = 0; c < NT_CH; c++) begin
        int s, n;
        logic [7:0] y;
        n = NT * NT_CH + c;
        s = ACC[r][c] >>> SH;
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        if (cm[n] && s >= -6 && s < 0) s = 0;
        if (cm[n] && s > 15 && s <= 25) s = 15;
        y[3:0] = mem.exists(O_LSB + m * N / 32 + NT * 4 + c / 32) ?
                 mem[O_LSB + m * N / 32 + NT * 4 + c / 32][(c % 32) * 4 +: 4] : 4'hx;
        y[7:4] = 0;
        if (pb[c]) begin y[7:4] = slot[p*4 +: 4]; p++; end
        if (s[7:4] != 0) nnz++;
        check(y == 8'(s), $sformatf("row %0d ch %0d got %0d exp %0d", r, c, $signed(y), s));
      end
      tot += 5 + (nnz + 31) / 32;
      check(nlines == (nnz + 31) / 32, $sformatf("row %0d msb lines %0d nnz %0d", r, nlines, nnz));
    end
    check(mem.size() == tot, $sformatf("lines written %0d exp %0d", mem.size(), tot));
    check(clips > 0, "clipping exercised");
    check(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
