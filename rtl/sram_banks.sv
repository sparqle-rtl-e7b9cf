// sram_banks: the banked on-chip SRAM with its per-bank arbitration.
//
// Line address a lives in bank a % NB at row a / NB, so consecutive lines
// sit in different banks. NREQ requesters (host, three drain writers, the
// IF load path and the FL load path in the top level) each offer one access
// per cycle. Every bank serves the lowest-numbered requester that addresses
// it; any other requester for that bank sees gnt = 0 and must hold its
// request (a bank-conflict stall). A granted read returns its line on
// rdata[r] with rvalid[r] one cycle later. With two load requesters and 16 B
// lines the load side gets the paper's 32 B/cycle; the drain side likewise.
// The fixed-priority order is this design's choice.
module sram_banks #(
  parameter int unsigned NB    = 16,
  parameter int unsigned LINES = 98304,
  parameter int unsigned NREQ  = 6
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NREQ-1:0]           req,
  input  logic [NREQ-1:0]           we,
  input  logic [$clog2(LINES)-1:0]  addr  [NREQ],
  input  logic [127:0]              wdata [NREQ],
  output logic [NREQ-1:0]           gnt,
  output logic [NREQ-1:0]           rvalid,
  output logic [127:0]              rdata [NREQ],
  output logic [NREQ-1:0]           conflict      // requested but not granted
);
  localparam int unsigned AW    = $clog2(LINES);
  localparam int unsigned BW    = $clog2(NB);
  localparam int unsigned DEPTH = LINES / NB;
  localparam int unsigned RW    = $clog2(DEPTH);

  logic              b_en    [NB];
  logic              b_we    [NB];
  logic [RW-1:0]     b_addr  [NB];
  logic [127:0]      b_wdata [NB];
  logic [127:0]      b_rdata [NB];
  logic [BW-1:0]     rd_bank_q [NREQ];
  logic [NREQ-1:0]   rd_q;

  always_comb begin
    gnt = '0;
    for (int b = 0; b < NB; b++) begin
      b_en[b] = 1'b0;  b_we[b] = 1'b0;  b_addr[b] = '0;  b_wdata[b] = '0;
      for (int r = NREQ - 1; r >= 0; r--) begin
        if (req[r] && int'(addr[r][BW-1:0]) == b) begin
          b_en[b]    = 1'b1;
          b_we[b]    = we[r];
          b_addr[b]  = RW'(addr[r][AW-1:BW]);
          b_wdata[b] = wdata[r];
        end
      end
    end
    for (int r = 0; r < NREQ; r++) begin
      gnt[r] = req[r];
      for (int q = 0; q < r; q++)
        if (req[q] && addr[q][BW-1:0] == addr[r][BW-1:0]) gnt[r] = 1'b0;
    end
    conflict = req & ~gnt;
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .WIDTH(128)) u_bank (
      .clk, .en(b_en[b]), .we(b_we[b]), .addr(b_addr[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0;
      for (int r = 0; r < NREQ; r++) rd_bank_q[r] <= '0;
    end else begin
      for (int r = 0; r < NREQ; r++) begin
        rd_q[r]      <= gnt[r] && !we[r];
        rd_bank_q[r] <= addr[r][BW-1:0];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NREQ; r++) rdata[r] = b_rdata[rd_bank_q[r]];
  end
  assign rvalid = rd_q;
endmodule
