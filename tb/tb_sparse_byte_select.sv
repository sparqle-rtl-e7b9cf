// tb_sparse_byte_select: random PBM lines of varying density; for every group
// the nibble offset, count, first line and number of lines must match a
// software prefix count over the four 32-bit group bitmaps.
module tb_sparse_byte_select;
  logic [127:0] pbm_line;
  logic [1:0] group;
  logic [6:0] nib_offset;
  logic [5:0] nib_count;
  logic [1:0] first_line, num_lines;
  logic [31:0] group_pbm;
  int checks = 0, failures = 0;

  sparse_byte_select dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int dens;
      dens = (t % 10 == 0) ? 0 : (t % 10 == 1) ? 100 : $urandom_range(100);
      for (int i = 0; i < 128; i++) pbm_line[i] = ($urandom_range(99) < dens);
      group = 2'(t % 4);
      #1;
      begin
        int off, cnt, exp_nl;
        off = 0; cnt = 0;
        for (int i = 0; i < int'(group) * 32; i++) off += pbm_line[i];
        for (int i = 0; i < 32; i++) cnt += pbm_line[group*32 + i];
        exp_nl = (cnt == 0) ? 0 : ((off / 32) == ((off + cnt - 1) / 32)) ? 1 : 2;
        checks++;
        if (int'(nib_offset) != off || int'(nib_count) != cnt || int'(first_line) != off / 32 ||
            int'(num_lines) != exp_nl || group_pbm !== pbm_line[group*32 +: 32]) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d off=%0d/%0d cnt=%0d/%0d nl=%0d/%0d", group, nib_offset, off,
                                      nib_count, cnt, num_lines, exp_nl);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
