// sparqle_top: the sub-precision activation accelerator.
//
// One layer run computes OUT = requant(X * W) for a token-major activation
// matrix X held in SRAM as LSB4 / PBM / compressed MSB4 and Int4 weights W,
// and writes OUT back in the same compressed form, so that it can be the X of
// the next layer. Blocks:
//   sparqle_ctrl  schedule: tiles, dense/sparse passes, drain
//   load_unit     SRAM -> circular buffers -> PE register files
//   pe_array      16x16 hybrid PEs, 8 Int4xInt4 MACs each (2048 MACs)
//   drain_unit    OF RFs -> requant -> clip -> split -> encode -> SRAM
//   sram_banks    1.5 MB in 16 single-port banks, per-bank arbitration
// SRAM requesters in priority order: host, drain LSB4, drain MSB4, drain PBM,
// load IF, load FL. The host port (one 16 B line per cycle, read data one
// cycle after the grant) is how a system processor or DMA puts layers in and
// takes results out; it has the highest priority and must not be used
// while a run is in progress except for reading results already written.
// The host also writes the column-importance mask (16 channels per word).
// desc.a4 selects Int4 activations (one dense round, LSB4-only tensors,
// Int4 outputs) instead of the hybrid Int8 format.
// Interface: drive desc, pulse start; done pulses when the layer is written.
// perf holds the counters of the last run (cleared by start).
module sparqle_top
  import sparqle_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // layer command
  input  layer_desc_t   desc,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // host SRAM port
  input  logic          host_req,
  input  logic          host_we,
  input  addr_t         host_addr,
  input  line_t         host_wdata,
  output logic          host_gnt,
  output logic          host_rvalid,
  output line_t         host_rdata,
  // column-importance mask
  input  logic          mask_we,
  input  logic [$clog2(MAX_CH/16)-1:0] mask_addr,
  input  logic [15:0]   mask_wdata,
  // counters
  output perf_t         perf
);
  localparam int unsigned NREQ = 6;
  localparam int unsigned DL   = DRAIN_LANES;

  // ---- SRAM --------------------------------------------------------------------
  logic [NREQ-1:0] s_req, s_we, s_gnt, s_rvalid, s_conflict;
  addr_t           s_addr  [NREQ];
  line_t           s_wdata [NREQ];
  line_t           s_rdata [NREQ];

  sram_banks #(.NB(SRAM_BANKS), .LINES(SRAM_LINES), .NREQ(NREQ)) u_sram (
    .clk, .rst_n, .req(s_req), .we(s_we), .addr(s_addr), .wdata(s_wdata),
    .gnt(s_gnt), .rvalid(s_rvalid), .rdata(s_rdata), .conflict(s_conflict));

  // ---- control -------------------------------------------------------------------
  logic        ld_start, ld_sparse, ld_done, ld_busy;
  logic [15:0] ld_m0, ld_n0, ld_kt, dr_m0, dr_nt;
  logic        of_clear, start_dense, start_sparse, array_busy;
  logic        dr_start, dr_done, dr_busy;
  logic        in_dense, in_sparse, in_load_wait, in_drain, in_overlap;

  sparqle_ctrl u_ctrl (
    .clk, .rst_n, .desc, .start, .busy, .done,
    .ld_start, .ld_sparse, .ld_m0, .ld_n0, .ld_kt, .ld_done,
    .of_clear, .start_dense, .start_sparse, .array_busy,
    .dr_start, .dr_m0, .dr_nt, .dr_done,
    .in_dense, .in_sparse, .in_load_wait, .in_drain, .in_overlap);

  // ---- load ------------------------------------------------------------------------
  logic [$clog2(N_ROWS)-1:0] pe_if_row;
  logic                      pe_lsb_we, pe_pbm_we, pe_msb_we, pe_fl_we;
  logic [KT*4-1:0]           pe_lsb_wdata, pe_msb_wdata, pe_fl_wdata;
  logic [KT-1:0]             pe_pbm_wdata;
  logic [$clog2(N_COLS)-1:0] pe_fl_col;
  logic [$clog2(OCS)-1:0]    pe_fl_sel;
  logic                      msb_group_skip;

  load_unit u_load (
    .clk, .rst_n, .desc, .start(ld_start), .mode_sparse(ld_sparse),
    .m0(ld_m0), .n0(ld_n0), .kt(ld_kt), .busy(ld_busy), .done(ld_done),
    .if_req(s_req[4]), .if_addr(s_addr[4]), .if_gnt(s_gnt[4]),
    .if_rvalid(s_rvalid[4]), .if_rdata(s_rdata[4]),
    .fl_req(s_req[5]), .fl_addr(s_addr[5]), .fl_gnt(s_gnt[5]),
    .fl_rvalid(s_rvalid[5]), .fl_rdata(s_rdata[5]),
    .pe_if_row, .pe_lsb_we, .pe_pbm_we, .pe_msb_we,
    .pe_lsb_wdata, .pe_pbm_wdata, .pe_msb_wdata,
    .pe_fl_col, .pe_fl_sel, .pe_fl_we, .pe_fl_wdata,
    .msb_lines_skipped(msb_group_skip));
  assign s_we[4] = 1'b0;  assign s_wdata[4] = '0;
  assign s_we[5] = 1'b0;  assign s_wdata[5] = '0;

  // ---- PE array ----------------------------------------------------------------------
  logic [N_ROWS-1:0]          row_skipped;
  logic [$clog2(N_ROWS)-1:0]  drain_row;
  logic [$clog2(NT_CH/DL)-1:0] drain_beat;
  logic signed [31:0]         drain_data [DL];

  pe_array #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .KT(KT), .OCS(OCS), .MACS(MACS), .DL(DL)) u_array (
    .clk, .rst_n,
    .if_row(pe_if_row), .a_signed(desc.a4), .lsb_we(pe_lsb_we), .lsb_wdata(pe_lsb_wdata),
    .pbm_we(pe_pbm_we), .pbm_wdata(pe_pbm_wdata), .msb_we(pe_msb_we), .msb_wdata(pe_msb_wdata),
    .fl_col(pe_fl_col), .fl_sel(pe_fl_sel), .fl_we(pe_fl_we), .fl_wdata(pe_fl_wdata),
    .of_clear, .start_dense, .start_sparse, .busy(array_busy), .row_skipped,
    .drain_row, .drain_beat, .drain_data);

  // ---- drain ---------------------------------------------------------------------------
  logic [4:0] st_clip, st_sat;
  logic       st_dstall;

  drain_unit u_drain (
    .clk, .rst_n, .desc, .start(dr_start), .m0(dr_m0), .nt(dr_nt), .busy(dr_busy), .done(dr_done),
    .mask_we, .mask_addr, .mask_wdata,
    .drain_row, .drain_beat, .drain_data,
    .wr_req(s_req[3:1]), .wr_addr(s_addr[1:3]), .wr_wdata(s_wdata[1:3]), .wr_gnt(s_gnt[3:1]),
    .stat_clipped(st_clip), .stat_saturated(st_sat), .stat_stall(st_dstall));
  assign s_we[3:1] = 3'b111;

  // ---- host ------------------------------------------------------------------------------
  assign s_req[0]    = host_req;
  assign s_we[0]     = host_we;
  assign s_addr[0]   = host_addr;
  assign s_wdata[0]  = host_wdata;
  assign host_gnt    = s_gnt[0];
  assign host_rvalid = s_rvalid[0];
  assign host_rdata  = s_rdata[0];

  // ---- counters ----------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else if (start && !busy) begin
      perf <= '0;
    end else if (busy) begin
      perf.cycles           <= perf.cycles + 1;
      perf.dense_cycles     <= perf.dense_cycles + 32'(in_dense);
      perf.sparse_cycles    <= perf.sparse_cycles + 32'(in_sparse);
      perf.load_wait_cycles <= perf.load_wait_cycles + 32'(in_load_wait);
      perf.drain_cycles     <= perf.drain_cycles + 32'(in_drain);
      perf.overlap_cycles   <= perf.overlap_cycles + 32'(in_overlap);
      perf.sparse_row_skips <= perf.sparse_row_skips + 32'($countones(row_skipped));
      perf.msb_group_skips  <= perf.msb_group_skips + 32'(msb_group_skip);
      perf.clipped          <= perf.clipped + 32'(st_clip);
      perf.saturated        <= perf.saturated + 32'(st_sat);
      perf.bank_conflicts   <= perf.bank_conflicts + 32'($countones(s_conflict[5:1]));
      perf.drain_stalls     <= perf.drain_stalls + 32'(st_dstall);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
