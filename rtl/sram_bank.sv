// sram_bank: one single-port bank of the on-chip activation/weight SRAM,
// written as a plain array (one 16 B line per word).
//
// One access per cycle: a write when en && we, otherwise a read when en,
// whose data appears on rdata in the next cycle (synchronous read). The
// contents are not reset. The paper gives the total size (1.5 MB) and the
// bank count of its figure (16); the port, width and one-cycle read latency
// are this design's choices.
module sram_bank #(
  parameter int unsigned DEPTH = 6144,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
