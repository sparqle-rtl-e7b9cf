// tb_msb_lsb_splitter: random Int8 beats; LSB4 must be the low nibble and the
// padded MSB4 byte must be zero-extended high nibble, lane by lane.
module tb_msb_lsb_splitter;
  localparam int L = 16;
  logic [7:0] x [L];
  logic [3:0] lsb [L];
  logic [7:0] msb_pad [L];
  int checks = 0, failures = 0;

  msb_lsb_splitter #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < L; i++) x[i] = 8'($urandom);
      #1;
      for (int i = 0; i < L; i++) begin
        int v;
        v = int'(x[i]);
        checks++;
        if (int'(lsb[i]) != v % 16 || int'(msb_pad[i]) != v / 16) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0h lsb=%0h msb=%0h", x[i], lsb[i], msb_pad[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
