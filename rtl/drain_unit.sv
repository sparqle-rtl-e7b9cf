// drain_unit: reads the finished output tile out of the PE array, turns the
// Int32 accumulators into Int8 activations and writes them back to SRAM in
// the compressed LSB4 / PBM / MSB4 form (paper Fig. 4(c)).
//
// Per token row of the tile, DL=16 outputs per cycle ("beat") pass through
//   drain staging register  (global drain mux output, one beat)
//   requant_unit            Int32 -> Int8 (shift, saturate)
//   subprec_clip            sparsity-enhancing clip on low-importance columns
//   msb_lsb_splitter        16x8b -> 16x4b LSB4 + 16x8b padded MSB4
//   sparse_encoder          padded MSB4 -> PBM bits + packed non-zero nibbles
//   three write_combine_buffers (LSB4, MSB4, PBM) -> 16 B SRAM lines
// and the drain address generator places the lines:
//   LSB4 line  o_lsb_base + m*N/32 + nt*4 + i     (always four per row)
//   PBM line   o_pbm_base + m*N/128 + nt          (one per row)
//   MSB4 line  o_msb_base + 4*(m*N/128 + nt) + i  (ceil(nnz/32) per row, 0..4)
// which is the layout the load unit reads for the next layer. LSB4 and
// MSB4/PBM go to separate SRAM requesters. A beat waits while any
// write-combine buffer is full; a line waits while its bank is busy. After
// the last beat of a row the MSB4 buffer is flushed and the next row starts
// once all three buffers are empty.
// The paper uses four splitters (one per four PE columns); this design drains
// one 16-output beat per cycle through a single splitter/encoder, which is
// what its 16 B-per-cycle drain figure and 32 B/cycle write-out need.
// Rows past the layer's last token are not drained. In Int4-activation
// mode (desc.a4) the outputs are saturated to Int4, not clipped, and only
// the LSB4 stream (the signed Int4 values) is written.
// The column-importance mask is a 1-bit-per-channel RAM (MAX_CH channels)
// written by the host; bit n covers output channel n of the layer.
module drain_unit
  import sparqle_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  layer_desc_t      desc,
  input  logic             start,
  input  logic [15:0]      m0,
  input  logic [15:0]      nt,          // output tile index: channels nt*NT_CH ..
  output logic             busy,
  output logic             done,
  // column-importance mask RAM, host write port
  input  logic             mask_we,
  input  logic [$clog2(MAX_CH/16)-1:0] mask_addr,
  input  logic [15:0]      mask_wdata,
  // PE array drain port
  output logic [$clog2(N_ROWS)-1:0] drain_row,
  output logic [$clog2(NT_CH/DRAIN_LANES)-1:0] drain_beat,
  input  logic signed [31:0] drain_data [DRAIN_LANES],
  // SRAM write requesters: 0 = LSB4, 1 = MSB4, 2 = PBM
  output logic [2:0]       wr_req,
  output addr_t            wr_addr  [3],
  output line_t            wr_wdata [3],
  input  logic [2:0]       wr_gnt,
  // statistics (pulses with counts)
  output logic [4:0]       stat_clipped,
  output logic [4:0]       stat_saturated,
  output logic             stat_stall
);
  localparam int unsigned DL    = DRAIN_LANES;
  localparam int unsigned BEATS = NT_CH / DL;        // 8
  localparam int unsigned RB    = $clog2(N_ROWS);
  localparam int unsigned BB    = $clog2(BEATS);
  localparam int unsigned MW    = MAX_CH / 16;

  typedef enum logic [1:0] {D_IDLE, D_BEATS, D_WAIT} drain_state_e;

  logic [15:0]       mask_mem [MW];
  always_ff @(posedge clk) if (mask_we) mask_mem[mask_addr] <= mask_wdata;

  drain_state_e      st_q;
  logic [15:0]       m0_q, nt_q;
  logic [RB:0]       row_q;
  logic [BB:0]       beat_q;
  logic [2:0]        lcnt_q [3];

  // ---- drain staging register ---------------------------------------------------
  logic              stg_v_q, stg_last_q;
  logic signed [31:0] stg_acc_q [DL];
  logic [15:0]       stg_mask_q;
  logic              stg_fire;
  logic              issue;

  assign drain_row  = row_q[RB-1:0];
  assign drain_beat = beat_q[BB-1:0];

  // ---- beat datapath --------------------------------------------------------------
  logic signed [7:0] q8  [DL];
  logic signed [7:0] c8  [DL];
  logic [DL-1:0]     sat_v, clip_v;
  logic [3:0]        lsb [DL];
  logic [7:0]        msb_pad [DL];
  logic [7:0]        unused_packed [DL];
  logic [DL-1:0]     pbm_bits;
  logic [DL*4-1:0]   msb_nib, lsb_nib;
  logic [$clog2(DL+1)-1:0] msb_cnt;

  requant_unit #(.LANES(DL)) u_rq (.acc(stg_acc_q), .shift(desc.shift), .y(q8), .saturated(sat_v));
  subprec_clip #(.LANES(DL)) u_clip (.x(q8), .col_mask(stg_mask_q), .clip_l(desc.clip_l),
                                     .clip_h(desc.clip_h), .y(c8), .clipped(clip_v));
  // Int4-activation mode: saturate to Int4, no clipping; only the LSB4
  // stream (the signed Int4 value) is written.
  logic [7:0]    c8u [DL];
  logic [DL-1:0] sat_o, clip_o;
  always_comb
    for (int i = 0; i < DL; i++) begin
      if (desc.a4) begin
        c8u[i]   = (q8[i] > 8'sd7) ? 8'h07 : (q8[i] < -8'sd8) ? 8'hF8 : q8[i];
        sat_o[i] = sat_v[i] || (q8[i] > 8'sd7) || (q8[i] < -8'sd8);
        clip_o[i] = 1'b0;
      end else begin
        c8u[i]   = c8[i];
        sat_o[i] = sat_v[i];
        clip_o[i] = clip_v[i];
      end
    end
  msb_lsb_splitter #(.LANES(DL)) u_split (.x(c8u), .lsb(lsb), .msb_pad(msb_pad));
  sparse_encoder #(.LANES(DL)) u_enc (.in_bytes(msb_pad), .bitmap(pbm_bits),
                                      .packed_bytes(unused_packed), .nib_out(msb_nib), .count(msb_cnt));
  always_comb for (int i = 0; i < DL; i++) lsb_nib[i*4 +: 4] = lsb[i];

  // ---- write-combine buffers -------------------------------------------------------
  logic [2:0] wcb_in_ready, wcb_out_valid, wcb_empty;
  line_t      wcb_line [3];

  write_combine_buffer #(.IN_N(DL)) u_wcb_lsb (
    .clk, .rst_n, .in_valid(stg_fire), .in_ready(wcb_in_ready[0]),
    .in_count(($clog2(DL+1))'(DL)), .in_nib(lsb_nib), .in_flush(stg_last_q),
    .out_valid(wcb_out_valid[0]), .out_ready(wr_gnt[0]), .out_line(wcb_line[0]), .empty(wcb_empty[0]));
  write_combine_buffer #(.IN_N(DL)) u_wcb_msb (
    .clk, .rst_n, .in_valid(stg_fire && !desc.a4), .in_ready(wcb_in_ready[1]),
    .in_count(msb_cnt), .in_nib(msb_nib), .in_flush(stg_last_q),
    .out_valid(wcb_out_valid[1]), .out_ready(wr_gnt[1]), .out_line(wcb_line[1]), .empty(wcb_empty[1]));
  write_combine_buffer #(.IN_N(DL)) u_wcb_pbm (
    .clk, .rst_n, .in_valid(stg_fire && !desc.a4), .in_ready(wcb_in_ready[2]),
    .in_count(($clog2(DL+1))'(DL / 4)), .in_nib({{(DL*3){1'b0}}, pbm_bits}), .in_flush(stg_last_q),
    .out_valid(wcb_out_valid[2]), .out_ready(wr_gnt[2]), .out_line(wcb_line[2]), .empty(wcb_empty[2]));

  assign stg_fire = stg_v_q && (&wcb_in_ready);
  assign issue    = (st_q == D_BEATS) && (int'(beat_q) < BEATS) && (!stg_v_q || stg_fire);

  // ---- drain address generator ---------------------------------------------------------
  logic [31:0] tok, g128;
  always_comb begin
    tok  = 32'(m0_q) + 32'(row_q[RB-1:0]);
    g128 = tok * 32'(desc.n >> 7) + 32'(nt_q);
    wr_addr[0] = addr_t'(32'(desc.o_lsb_base) + tok * 32'(desc.n >> 5) + 32'(nt_q) * 4 + 32'(lcnt_q[0]));
    wr_addr[1] = addr_t'(32'(desc.o_msb_base) + g128 * 4 + 32'(lcnt_q[1]));
    wr_addr[2] = addr_t'(32'(desc.o_pbm_base) + g128 + 32'(lcnt_q[2]));
    for (int s = 0; s < 3; s++) wr_wdata[s] = wcb_line[s];
  end
  assign wr_req = wcb_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= D_IDLE; m0_q <= '0; nt_q <= '0; row_q <= '0; beat_q <= '0;
      for (int s = 0; s < 3; s++) lcnt_q[s] <= '0;
      stg_v_q <= 1'b0; stg_last_q <= 1'b0; stg_mask_q <= '0;
      for (int i = 0; i < DL; i++) stg_acc_q[i] <= '0;
      done <= 1'b0;
      stat_clipped <= '0; stat_saturated <= '0; stat_stall <= 1'b0;
    end else begin
      done <= 1'b0;
      stat_clipped   <= stg_fire ? 5'($countones(clip_o)) : '0;
      stat_saturated <= stg_fire ? 5'($countones(sat_o))  : '0;
      stat_stall     <= (stg_v_q && !stg_fire) || (|(wr_req & ~wr_gnt));
      for (int s = 0; s < 3; s++)
        if (wr_req[s] && wr_gnt[s]) lcnt_q[s] <= lcnt_q[s] + 1'b1;

      if (stg_fire) stg_v_q <= 1'b0;
      if (issue) begin
        stg_v_q    <= 1'b1;
        stg_acc_q  <= drain_data;
        stg_last_q <= (int'(beat_q) == BEATS - 1);
        stg_mask_q <= mask_mem[($clog2(MW))'(32'(nt_q) * BEATS + 32'(beat_q))];
        beat_q     <= beat_q + 1'b1;
      end

      unique case (st_q)
        D_IDLE: if (start) begin
          m0_q <= m0; nt_q <= nt; row_q <= '0; beat_q <= '0;
          for (int s = 0; s < 3; s++) lcnt_q[s] <= '0;
          st_q <= D_BEATS;
        end
        D_BEATS: if (int'(beat_q) == BEATS && !stg_v_q) st_q <= D_WAIT;
        D_WAIT: if (&wcb_empty) begin
          for (int s = 0; s < 3; s++) lcnt_q[s] <= '0;
          beat_q <= '0;
          if (int'(row_q) == N_ROWS - 1 ||
              32'(m0_q) + 32'(row_q[RB-1:0]) + 1 >= 32'(desc.m)) begin
            st_q <= D_IDLE;
            done <= 1'b1;
          end else begin
            row_q <= row_q + 1'b1;
            st_q  <= D_BEATS;
          end
        end
        default: st_q <= D_IDLE;
      endcase
    end
  end
  assign busy = (st_q != D_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) start |-> st_q == D_IDLE);
endmodule
