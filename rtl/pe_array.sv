// pe_array: the N_ROWS x N_COLS array of hybrid PEs with its IF/FL
// distribution and the global drain multiplexer.
//
// a_signed (Int4-activation mode) goes to every PE.
// Dataflow is output stationary. PE (r, c) accumulates output channels
// c*OCS .. c*OCS+OCS-1 of token r of the current tile. Activations are
// broadcast across a row (every PE of row r gets the same LSB4, PBM and
// compressed MSB4 row), weights across a column (every PE of column c gets the
// same FL row), as the paper describes. One row write and one FL write can
// happen per cycle, each a full 16 B column-buffer line.
// start_dense / start_sparse start the pass in all PEs at once; busy stays
// high until the slowest PE is done (PEs of different rows see different
// MSB4 sparsity and finish at different times).
// Drain: drain_row selects a token and drain_beat a group of DL consecutive
// output channels (beat b = channels b*DL .. b*DL+DL-1); the accumulators
// appear combinationally on drain_data.
module pe_array #(
  parameter int unsigned N_ROWS = 16,
  parameter int unsigned N_COLS = 16,
  parameter int unsigned KT     = 32,
  parameter int unsigned OCS    = 8,
  parameter int unsigned MACS   = 8,
  parameter int unsigned DL     = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // IF row writes
  input  logic [$clog2(N_ROWS)-1:0]    if_row,
  input  logic                         a_signed,   // Int4-activation mode, to every PE
  input  logic                         lsb_we,
  input  logic [KT*4-1:0]              lsb_wdata,
  input  logic                         pbm_we,
  input  logic [KT-1:0]                pbm_wdata,
  input  logic                         msb_we,
  input  logic [KT*4-1:0]              msb_wdata,
  // FL column writes
  input  logic [$clog2(N_COLS)-1:0]    fl_col,
  input  logic [$clog2(OCS)-1:0]       fl_sel,
  input  logic                         fl_we,
  input  logic [KT*4-1:0]              fl_wdata,
  // control
  input  logic                         of_clear,
  input  logic                         start_dense,
  input  logic                         start_sparse,
  output logic                         busy,
  output logic [N_ROWS-1:0]            row_skipped,   // pulse per row: sparse pass skipped
  // drain
  input  logic [$clog2(N_ROWS)-1:0]    drain_row,
  input  logic [$clog2(N_COLS*OCS/DL)-1:0] drain_beat,
  output logic signed [31:0]           drain_data [DL]
);
  logic signed [31:0] of_all [N_ROWS][N_COLS][OCS];
  logic [N_ROWS*N_COLS-1:0] busy_v;
  logic skipped [N_ROWS][N_COLS];

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    for (genvar c = 0; c < N_COLS; c++) begin : g_col
      hybrid_pe #(.KT(KT), .OCS(OCS), .MACS(MACS)) u_pe (
        .clk, .rst_n,
        .a_signed (a_signed),
        .lsb_we   (lsb_we && if_row == r),
        .lsb_wdata,
        .pbm_we   (pbm_we && if_row == r),
        .pbm_wdata,
        .msb_we   (msb_we && if_row == r),
        .msb_wdata,
        .fl_we    (fl_we && fl_col == c),
        .fl_wsel  (fl_sel),
        .fl_wdata,
        .of_clear, .start_dense, .start_sparse,
        .busy           (busy_v[r*N_COLS + c]),
        .sparse_skipped (skipped[r][c]),
        .of_out         (of_all[r][c]));
    end
    assign row_skipped[r] = skipped[r][0];
  end

  assign busy = |busy_v;

  // global drain multiplexer
  always_comb begin
    for (int i = 0; i < DL; i++) begin
      int unsigned ch;
      ch = int'(drain_beat) * DL + i;
      drain_data[i] = of_all[drain_row][ch / OCS][ch % OCS];
    end
  end
endmodule
