// sparqle_ctrl: the control block that walks one layer (the schedule
// descriptor) tile by tile and sequences load, compute and drain.
//
// Loop order (output stationary):
//   for each token tile mt (N_ROWS tokens), for each output tile nt (NT_CH channels):
//     clear the OF RFs
//     for each 32-channel input group kt:
//       dense load   (LSB4 + FL)
//       dense pass   on LSB4 || sparse load (PBM + MSB4) into the IF RFs
//       sparse pass  on MSB4 (skipped per PE when a row has no non-zero MSB4)
//     drain the tile
// The dense pass always precedes the sparse pass and the MSB4/PBM load runs
// during the dense pass, as in the paper's timeline (Fig. 5). Loading the
// next group during the sparse pass, and overlapping drain with the next
// tile's load, are not done here: the FL RF and the OF RF are single-buffered.
// In Int4-activation mode (desc.a4) each group gets only the dense load and
// the dense pass: one compute round instead of two.
// The last token tile may be partly filled (M not a multiple of N_ROWS).
// start is taken in IDLE; done pulses for one cycle at the end.
module sparqle_ctrl
  import sparqle_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  layer_desc_t  desc,
  input  logic         start,
  output logic         busy,
  output logic         done,
  // load unit
  output logic         ld_start,
  output logic         ld_sparse,
  output logic [15:0]  ld_m0,
  output logic [15:0]  ld_n0,
  output logic [15:0]  ld_kt,
  input  logic         ld_done,
  // PE array
  output logic         of_clear,
  output logic         start_dense,
  output logic         start_sparse,
  input  logic         array_busy,
  // drain unit
  output logic         dr_start,
  output logic [15:0]  dr_m0,
  output logic [15:0]  dr_nt,
  input  logic         dr_done,
  // phase indication for the counters
  output logic         in_dense,
  output logic         in_sparse,
  output logic         in_load_wait,
  output logic         in_drain,
  output logic         in_overlap
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_LDD, S_LDD_W, S_DENSE, S_DS_W, S_SPARSE, S_SP_W, S_DRAIN, S_DR_W
  } ctrl_state_e;

  ctrl_state_e st_q;
  logic [15:0] mt_q, nt_q, kt_q;
  logic        ld_done_q;

  wire last_kt = (32'(kt_q) + 1) * KT >= 32'(desc.k);
  wire last_nt = (32'(nt_q) + 1) * NT_CH >= 32'(desc.n);
  wire last_mt = (32'(mt_q) + 1) * N_ROWS >= 32'(desc.m);

  assign ld_m0 = 16'(32'(mt_q) * N_ROWS);
  assign ld_n0 = 16'(32'(nt_q) * NT_CH);
  assign ld_kt = kt_q;
  assign dr_m0 = ld_m0;
  assign dr_nt = nt_q;

  always_comb begin
    ld_start = 1'b0; ld_sparse = 1'b0; of_clear = 1'b0;
    start_dense = 1'b0; start_sparse = 1'b0; dr_start = 1'b0;
    unique case (st_q)
      S_CLR:    of_clear = 1'b1;
      S_LDD:    ld_start = 1'b1;
      S_DENSE:  begin start_dense = 1'b1; ld_start = !desc.a4; ld_sparse = !desc.a4; end
      S_SPARSE: start_sparse = 1'b1;
      S_DRAIN:  dr_start = 1'b1;
      default: ;
    endcase
  end

  assign busy         = (st_q != S_IDLE);
  assign in_dense     = (st_q == S_DS_W) && array_busy;
  assign in_overlap   = (st_q == S_DS_W) && array_busy && !ld_done_q && !ld_done && !desc.a4;
  assign in_sparse    = (st_q == S_SP_W) && array_busy;
  assign in_load_wait = (st_q == S_LDD_W) || ((st_q == S_DS_W) && !array_busy);
  assign in_drain     = (st_q == S_DR_W);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; mt_q <= '0; nt_q <= '0; kt_q <= '0; ld_done_q <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          mt_q <= '0; nt_q <= '0; kt_q <= '0;
          st_q <= S_CLR;
        end
        S_CLR:   st_q <= S_LDD;
        S_LDD:   st_q <= S_LDD_W;
        S_LDD_W: if (ld_done) st_q <= S_DENSE;
        S_DENSE: begin ld_done_q <= 1'b0; st_q <= S_DS_W; end
        S_DS_W: begin
          if (ld_done) ld_done_q <= 1'b1;
          if (!array_busy && (ld_done_q || ld_done || desc.a4))
            st_q <= desc.a4 ? S_SP_W : S_SPARSE;   // Int4 activations: no sparse round
        end
        S_SPARSE: st_q <= S_SP_W;
        S_SP_W: if (!array_busy) begin
          if (last_kt) st_q <= S_DRAIN;
          else begin
            kt_q <= kt_q + 1'b1;
            st_q <= S_LDD;
          end
        end
        S_DRAIN: st_q <= S_DR_W;
        S_DR_W: if (dr_done) begin
          kt_q <= '0;
          if (!last_nt) begin
            nt_q <= nt_q + 1'b1;
            st_q <= S_CLR;
          end else if (!last_mt) begin
            nt_q <= '0;
            mt_q <= mt_q + 1'b1;
            st_q <= S_CLR;
          end else begin
            st_q <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
