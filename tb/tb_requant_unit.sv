// tb_requant_unit: random Int32 accumulators and shifts; output must equal
// saturate_int8(acc >>> shift), with the saturation flag.
module tb_requant_unit;
  localparam int L = 16;
  logic signed [31:0] acc [L];
  logic [4:0] shift;
  logic signed [7:0] y [L];
  logic [L-1:0] saturated;
  int checks = 0, failures = 0;

  requant_unit #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      shift = 5'($urandom_range(12));
      for (int i = 0; i < L; i++) acc[i] = $signed($urandom_range(40000)) - 20000;
      #1;
      for (int i = 0; i < L; i++) begin
        longint q;
        q = longint'(acc[i]);
        q = (q < 0) ? -((-q + (64'sd1 << shift) - 1) >> shift) : (q >> shift);  // floor division
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        checks++;
        if (longint'(y[i]) != q || saturated[i] != (longint'(acc[i] >>> shift) != q)) begin
          failures++;
          if (failures < 10) $display("FAIL acc=%0d sh=%0d y=%0d exp=%0d", acc[i], shift, y[i], q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
