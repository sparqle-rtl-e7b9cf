// tb_sparse_encoder: random beats with varying density (all-zero and all
// non-zero included); checks bitmap, packed bytes, nibble stream and count
// against a software compaction.
module tb_sparse_encoder;
  localparam int L = 16;
  logic [7:0] in_bytes [L];
  logic [L-1:0] bitmap;
  logic [7:0] packed_bytes [L];
  logic [L*4-1:0] nib_out;
  logic [$clog2(L+1)-1:0] count;
  int checks = 0, failures = 0;

  sparse_encoder #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int dens, p;
      logic [7:0] exp_p [L];
      logic [L-1:0] exp_bm;
      dens = (t == 0) ? 0 : (t == 1) ? 100 : $urandom_range(100);
      for (int i = 0; i < L; i++) in_bytes[i] = ($urandom_range(99) < dens) ? 8'($urandom_range(15, 1)) : 8'h00;
      #1;
      p = 0;
      for (int i = 0; i < L; i++) exp_p[i] = 8'h00;
      for (int i = 0; i < L; i++) begin
        exp_bm[i] = (in_bytes[i] != 0);
        if (exp_bm[i]) begin exp_p[p] = in_bytes[i]; p++; end
      end
      checks++;
      if (bitmap !== exp_bm || int'(count) != p) begin
        failures++;
        if (failures < 10) $display("FAIL bitmap %h exp %h count %0d exp %0d", bitmap, exp_bm, count, p);
      end
      for (int i = 0; i < L; i++) begin
        checks++;
        if (packed_bytes[i] !== exp_p[i] || nib_out[i*4 +: 4] !== exp_p[i][3:0]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
