// tb_subprec_clip: checks the sparsity-enhancing clip against the example of
// the clipping illustration (l = -5, h = 20: -1 and -5 -> 0, 16 and 17 -> 15,
// other values and unmasked columns unchanged) and against random values.
module tb_subprec_clip;
  localparam int L = 16;
  logic signed [7:0] x [L], y [L];
  logic [L-1:0] col_mask, clipped;
  logic signed [7:0] clip_l, clip_h;
  int checks = 0, failures = 0;

  subprec_clip #(.LANES(L)) dut (.*);

  function automatic logic signed [7:0] ref_clip(logic signed [7:0] v, logic m,
                                                 logic signed [7:0] l, logic signed [7:0] h);
    if (m && v >= l && v < 0) return 0;
    if (m && v > 15 && v <= h) return 15;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // example: values of the masked columns
    logic signed [7:0] ex_in  [L] = '{0, 8, 9, -1, -5, -10, 7, 11, 16, 17, -6, 100, 3, 10, 15, 16};
    logic signed [7:0] ex_out [L] = '{0, 8, 9, 0, 0, -10, 7, 11, 15, 15, -6, 100, 3, 10, 15, 15};
    clip_l = -8'sd5; clip_h = 8'sd20;
    x = ex_in; col_mask = '1;
    #1;
    for (int i = 0; i < L; i++) begin
      checks++;
      if (y[i] !== ex_out[i]) begin failures++; $display("FAIL ex lane %0d %0d->%0d", i, x[i], y[i]); end
    end
    col_mask = '0;  // important columns are never clipped
    #1;
    for (int i = 0; i < L; i++) begin
      checks++;
      if (y[i] !== ex_in[i] || clipped[i]) failures++;
    end
    for (int t = 0; t < 2000; t++) begin
      clip_l = -8'($urandom_range(20));
      clip_h = 8'($urandom_range(60, 15));
      col_mask = L'($urandom);
      for (int i = 0; i < L; i++) x[i] = 8'($urandom_range(255));
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== ref_clip(x[i], col_mask[i], clip_l, clip_h) ||
            clipped[i] !== (y[i] != x[i])) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d m=%0d l=%0d h=%0d y=%0d", x[i], col_mask[i], clip_l, clip_h, y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
