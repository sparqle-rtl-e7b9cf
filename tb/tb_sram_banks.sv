// tb_sram_banks: six requesters issue random reads and writes (a reduced
// 1024-line memory, same 16-bank structure). Checks every cycle that the
// grants follow fixed priority per bank (lowest index wins, others see a
// conflict), and that every granted read returns, one cycle later, the last
// line written to that address, using a reference memory.
module tb_sram_banks;
  localparam int NB = 16, LINES = 1024, NREQ = 6, AW = $clog2(LINES);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NREQ-1:0] req = '0, we = '0, gnt, rvalid, conflict;
  logic [AW-1:0] addr [NREQ];
  logic [127:0] wdata [NREQ], rdata [NREQ];
  int checks = 0, failures = 0;
  int conflicts_seen = 0;

  sram_banks #(.NB(NB), .LINES(LINES), .NREQ(NREQ)) dut (.*);

  logic [127:0] ref_mem [LINES];
  logic [127:0] exp_rd [NREQ];
  logic         exp_v  [NREQ];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NREQ; r++) begin addr[r] = '0; wdata[r] = '0; exp_v[r] = 0; exp_rd[r] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise memory through requester 0
    for (int a = 0; a < LINES; a++) begin
      @(negedge clk);
      req = 6'b1; we = 6'b1; addr[0] = AW'(a); wdata[0] = {4{32'(a * 7 + 1)}};
      ref_mem[a] = wdata[0];
    end
    @(negedge clk);
    req = '0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      // read data of the previous cycle
      for (int r = 0; r < NREQ; r++) begin
        if (exp_v[r]) begin
          checks++;
          if (!rvalid[r] || rdata[r] !== exp_rd[r]) begin
            failures++;
            if (failures < 10) $display("FAIL rd r=%0d", r);
          end
        end else if (rvalid[r]) begin
          failures++; checks++;
        end
      end
      for (int r = 0; r < NREQ; r++) begin
        req[r] = ($urandom_range(99) < 60);
        we[r]  = ($urandom_range(99) < 30);
        addr[r] = AW'($urandom_range(LINES - 1));
        wdata[r] = {$urandom, $urandom, $urandom, $urandom};
      end
      #1;
      for (int r = 0; r < NREQ; r++) begin
        logic exp_g;
        exp_g = req[r];
        for (int q = 0; q < r; q++) if (req[q] && addr[q] % NB == addr[r] % NB) exp_g = 0;
        checks++;
        if (gnt[r] !== exp_g || conflict[r] !== (req[r] && !exp_g)) begin
          failures++;
          if (failures < 10) $display("FAIL gnt r=%0d", r);
        end
        if (conflict[r]) conflicts_seen++;
        exp_v[r] = exp_g && !we[r];
        if (exp_g && !we[r]) exp_rd[r] = ref_mem[addr[r]];
      end
      for (int r = 0; r < NREQ; r++) if (gnt[r] && we[r]) ref_mem[addr[r]] = wdata[r];
    end
    checks++;
    if (conflicts_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
