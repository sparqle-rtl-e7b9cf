// load_unit: moves one tile of activations and weights from SRAM into the PE
// register files (paper Fig. 4(a)): SRAM -> circular buffer -> column-buffer
// line -> PE RFs, with a load FSM generating addresses.
//
// A command (start) loads, for tokens m0..m0+N_ROWS-1 and 32-channel input
// group kt, either
//   mode = LD_DENSE : the LSB4 line of every token (IF path) and the FL lines
//                     of all N_COLS*OCS output channels n0.. (FL path); or
//   mode = LD_SPARSE: the PBM line and the compressed MSB4 lines of every token
//                     (IF path only). The sparse byte select works out from the
//                     PBM which of the (at most four) slot lines hold this
//                     group's non-zero MSB4 nibbles; only those lines are read
//                     (none when the group has no non-zero MSB4). The nibbles
//                     are then cut out of the fetched lines and written,
//                     together with the 32-bit group PBM, into the PE row.
// The dense load is the sparse branch bypassed. The two paths (IF, FL) run
// independently, each with its own SRAM requester and circular buffer, so
// the load uses up to two 16 B lines (32 B) per cycle from SRAM and writes up
// to one IF row and one FL row (16 B each) per cycle into the array.
// A requester holds its request while a bank conflict denies the grant, and
// stops issuing while its circular buffer could overflow.
// SRAM layout (this design's own; see the package): X LSB4 line =
// x_lsb_base + m*K/32 + kt; X PBM line = x_pbm_base + m*K/128 + kt/4;
// X MSB4 slot = x_msb_base + 4*(m*K/128 + kt/4); W line = w_base + n*K/32 + kt.
// Array rows past the last token M-1 are loaded with token M-1 again; the
// drain unit does not write them out.
// done pulses one cycle after the last RF write of the command.
module load_unit
  import sparqle_pkg::*;
#(
  parameter int unsigned CB_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_desc_t      desc,
  input  logic             start,
  input  logic             mode_sparse,   // 0: LD_DENSE, 1: LD_SPARSE
  input  logic [15:0]      m0,
  input  logic [15:0]      n0,
  input  logic [15:0]      kt,
  output logic             busy,
  output logic             done,
  // SRAM requesters: IF and FL
  output logic             if_req,
  output addr_t            if_addr,
  input  logic             if_gnt,
  input  logic             if_rvalid,
  input  line_t            if_rdata,
  output logic             fl_req,
  output addr_t            fl_addr,
  input  logic             fl_gnt,
  input  logic             fl_rvalid,
  input  line_t            fl_rdata,
  // PE array writes
  output logic [$clog2(N_ROWS)-1:0] pe_if_row,
  output logic             pe_lsb_we,
  output logic             pe_pbm_we,
  output logic             pe_msb_we,
  output logic [KT*4-1:0]  pe_lsb_wdata,
  output logic [KT-1:0]    pe_pbm_wdata,
  output logic [KT*4-1:0]  pe_msb_wdata,
  output logic [$clog2(N_COLS)-1:0] pe_fl_col,
  output logic [$clog2(OCS)-1:0]    pe_fl_sel,
  output logic             pe_fl_we,
  output logic [KT*4-1:0]  pe_fl_wdata,
  // statistics
  output logic             msb_lines_skipped  // pulse: a token group needed no MSB4 line
);
  localparam int unsigned RB  = $clog2(N_ROWS);
  localparam int unsigned FLN = N_COLS * OCS;
  localparam int unsigned CBW = $clog2(CB_DEPTH + 1);

  typedef enum logic [1:0] {T_PBM, T_LSB, T_MSB} tag_e;
  typedef enum logic [2:0] {R_IDLE, R_LSB, R_PBM, R_PBMW, R_MSB, R_DONE} ifreq_e;
  typedef enum logic [1:0] {C_IDLE, C_PBM, C_LSB, C_MSB} ifcons_e;

  // ---- command registers ------------------------------------------------------
  logic        sparse_q;
  logic [15:0] m0_q, n0_q, kt_q;
  logic        active_q;

  // ---- IF path ----------------------------------------------------------------------
  ifreq_e  rq_q;
  logic [RB:0] rq_row_q;
  logic [1:0]  rq_line_q, rq_nl_q, rq_first_q;
  logic        if_inflight_q;
  logic        if_push, if_full, if_empty, if_pop;
  line_t       if_head;
  logic [1:0]  if_head_tag;
  logic [CBW-1:0] if_cnt;
  logic [1:0]  if_push_tag_q;

  ifcons_e cs_q;
  logic [RB:0] cs_row_q;
  logic [31:0] cs_pbm_q;
  logic [6:0]  cs_off_q;
  logic [5:0]  cs_cnt_q;
  logic [1:0]  cs_nl_q, cs_got_q;
  logic [255:0] cs_lines_q;

  // sparse byte select for the requester (snooped PBM) and for the consumer
  logic [6:0] sbs_r_off, sbs_c_off;
  logic [5:0] sbs_r_cnt, sbs_c_cnt;
  logic [1:0] sbs_r_first, sbs_c_first, sbs_r_nl, sbs_c_nl;
  logic [31:0] sbs_r_pbm, sbs_c_pbm;

  sparse_byte_select u_sbs_req (
    .pbm_line(if_rdata), .group(kt_q[1:0]),
    .nib_offset(sbs_r_off), .nib_count(sbs_r_cnt), .first_line(sbs_r_first),
    .num_lines(sbs_r_nl), .group_pbm(sbs_r_pbm));
  sparse_byte_select u_sbs_cons (
    .pbm_line(if_head), .group(kt_q[1:0]),
    .nib_offset(sbs_c_off), .nib_count(sbs_c_cnt), .first_line(sbs_c_first),
    .num_lines(sbs_c_nl), .group_pbm(sbs_c_pbm));

  // address generation
  logic [31:0] tok;
  logic [31:0] grp128;
  always_comb begin
    tok     = 32'(m0_q) + 32'(rq_row_q[RB-1:0]);
    if (tok >= 32'(desc.m)) tok = 32'(desc.m) - 1;   // rows past M repeat the last token
    grp128  = tok * 32'(desc.k >> 7) + 32'(kt_q >> 2);
    if_addr = '0;
    unique case (rq_q)
      R_LSB:   if_addr = addr_t'(32'(desc.x_lsb_base) + tok * 32'(desc.k >> 5) + 32'(kt_q));
      R_PBM:   if_addr = addr_t'(32'(desc.x_pbm_base) + grp128);
      R_MSB:   if_addr = addr_t'(32'(desc.x_msb_base) + grp128 * 4 + 32'(rq_first_q) + 32'(rq_line_q));
      default: if_addr = '0;
    endcase
  end

  // room in the circular buffer for one more line (count the one in flight)
  wire if_room = (int'(if_cnt) + (if_inflight_q ? 1 : 0)) < CB_DEPTH;
  assign if_req = active_q && if_room &&
                  (rq_q == R_LSB || rq_q == R_PBM || rq_q == R_MSB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_q <= R_IDLE; rq_row_q <= '0; rq_line_q <= '0; rq_nl_q <= '0; rq_first_q <= '0;
      if_inflight_q <= 1'b0; if_push_tag_q <= '0;
    end else begin
      if_inflight_q <= if_req && if_gnt;
      if (if_req && if_gnt)
        if_push_tag_q <= (rq_q == R_LSB) ? 2'(T_LSB) : (rq_q == R_PBM) ? 2'(T_PBM) : 2'(T_MSB);
      unique case (rq_q)
        R_IDLE: if (start) begin
          rq_row_q <= '0;
          rq_q     <= mode_sparse ? R_PBM : R_LSB;
        end
        R_LSB: if (if_req && if_gnt) begin
          if (int'(rq_row_q) == N_ROWS - 1) rq_q <= R_DONE;
          rq_row_q <= rq_row_q + 1'b1;
        end
        R_PBM: if (if_req && if_gnt) rq_q <= R_PBMW;
        R_PBMW: if (if_rvalid) begin
          rq_nl_q    <= sbs_r_nl;
          rq_first_q <= sbs_r_first;
          rq_line_q  <= '0;
          if (sbs_r_nl == 0) begin
            if (int'(rq_row_q) == N_ROWS - 1) rq_q <= R_DONE;
            else                              rq_q <= R_PBM;
            rq_row_q <= rq_row_q + 1'b1;
          end else begin
            rq_q <= R_MSB;
          end
        end
        R_MSB: if (if_req && if_gnt) begin
          if (rq_line_q == rq_nl_q - 1'b1) begin
            if (int'(rq_row_q) == N_ROWS - 1) rq_q <= R_DONE;
            else                              rq_q <= R_PBM;
            rq_row_q <= rq_row_q + 1'b1;
          end
          rq_line_q <= rq_line_q + 1'b1;
        end
        R_DONE: if (done) rq_q <= R_IDLE;
        default: rq_q <= R_IDLE;
      endcase
    end
  end

  assign if_push = if_rvalid;

  circular_buffer #(.DEPTH(CB_DEPTH), .TAG_W(2)) u_if_cb (
    .clk, .rst_n,
    .push(if_push), .push_line(if_rdata), .push_tag(if_push_tag_q), .full(if_full),
    .pop(if_pop), .head_line(if_head), .head_tag(if_head_tag), .empty(if_empty),
    .count(if_cnt));

  // Packed MSB4 nibbles of the current group, aligned to nibble 0 and
  // masked to the group's non-zero count
  logic [255:0]    msb_shifted;
  logic [KT*4-1:0] msb_mask, msb_packed;
  always_comb begin
    msb_shifted = cs_lines_q >> {cs_off_q[4:0], 2'b00};
    for (int i = 0; i < KT; i++)
      msb_mask[i*4 +: 4] = (i < int'(cs_cnt_q)) ? 4'hF : 4'h0;
    msb_packed = msb_shifted[KT*4-1:0] & msb_mask;
  end

  // IF consumer: column-buffer line -> PE row
  always_comb begin
    if_pop       = 1'b0;
    pe_lsb_we    = 1'b0;
    pe_pbm_we    = 1'b0;
    pe_msb_we    = 1'b0;
    pe_lsb_wdata = if_head;
    pe_pbm_wdata = cs_pbm_q;
    pe_msb_wdata = '0;
    pe_if_row    = cs_row_q[RB-1:0];
    unique case (cs_q)
      C_LSB: if (!if_empty) begin
        if_pop    = 1'b1;
        pe_lsb_we = 1'b1;
      end
      C_PBM: if (!if_empty) begin
        if_pop = 1'b1;
        if (sbs_c_nl == 0) begin        // no MSB4 line: write now
          pe_pbm_we    = 1'b1;
          pe_msb_we    = 1'b1;
          pe_pbm_wdata = sbs_c_pbm;
        end
      end
      C_MSB: begin
        if (cs_got_q == cs_nl_q) begin
          pe_pbm_we    = 1'b1;
          pe_msb_we    = 1'b1;
          pe_msb_wdata = msb_packed;
        end else if (!if_empty) begin
          if_pop = 1'b1;
        end
      end
      default: ;
    endcase
  end

  logic cs_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_q <= C_IDLE; cs_row_q <= '0; cs_pbm_q <= '0; cs_off_q <= '0; cs_cnt_q <= '0;
      cs_nl_q <= '0; cs_got_q <= '0; cs_lines_q <= '0; msb_lines_skipped <= 1'b0;
    end else begin
      msb_lines_skipped <= 1'b0;
      unique case (cs_q)
        C_IDLE: if (start) begin
          cs_row_q <= '0;
          cs_q     <= mode_sparse ? C_PBM : C_LSB;
        end
        C_LSB: if (if_pop) begin
          cs_row_q <= cs_row_q + 1'b1;
          if (int'(cs_row_q) == N_ROWS - 1) cs_q <= C_IDLE;
        end
        C_PBM: if (if_pop) begin
          cs_pbm_q <= sbs_c_pbm;
          cs_off_q <= sbs_c_off;
          cs_cnt_q <= sbs_c_cnt;
          cs_nl_q  <= sbs_c_nl;
          cs_got_q <= '0;
          cs_lines_q <= '0;
          if (sbs_c_nl == 0) begin
            msb_lines_skipped <= 1'b1;
            cs_row_q <= cs_row_q + 1'b1;
            if (int'(cs_row_q) == N_ROWS - 1) cs_q <= C_IDLE;
          end else begin
            cs_q <= C_MSB;
          end
        end
        C_MSB: begin
          if (pe_msb_we) begin
            cs_row_q <= cs_row_q + 1'b1;
            cs_q     <= (int'(cs_row_q) == N_ROWS - 1) ? C_IDLE : C_PBM;
          end else if (if_pop) begin
            cs_lines_q[cs_got_q[0]*128 +: 128] <= if_head;
            cs_got_q <= cs_got_q + 1'b1;
          end
        end
        default: cs_q <= C_IDLE;
      endcase
    end
  end
  assign cs_done = (cs_q == C_IDLE);

  // ---- FL path ------------------------------------------------------------------
  logic [$clog2(FLN+1)-1:0] fr_idx_q, fc_idx_q;
  logic        fl_inflight_q;
  logic        fl_full, fl_empty, fl_pop;
  line_t       fl_head;
  logic [CBW-1:0] fl_cnt;
  logic        fl_active_q;

  wire fl_room = (int'(fl_cnt) + (fl_inflight_q ? 1 : 0)) < CB_DEPTH;
  assign fl_req  = fl_active_q && (int'(fr_idx_q) < FLN) && fl_room;
  assign fl_addr = addr_t'(32'(desc.w_base) +
                   (32'(n0_q) + 32'(fr_idx_q)) * 32'(desc.k >> 5) + 32'(kt_q));

  circular_buffer #(.DEPTH(CB_DEPTH), .TAG_W(1)) u_fl_cb (
    .clk, .rst_n,
    .push(fl_rvalid), .push_line(fl_rdata), .push_tag(1'b0), .full(fl_full),
    .pop(fl_pop), .head_line(fl_head), .head_tag(), .empty(fl_empty), .count(fl_cnt));

  assign fl_pop      = fl_active_q && !fl_empty;
  assign pe_fl_we    = fl_pop;
  assign pe_fl_wdata = fl_head;
  assign pe_fl_col   = ($clog2(N_COLS))'(fc_idx_q / OCS);
  assign pe_fl_sel   = ($clog2(OCS))'(fc_idx_q % OCS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fr_idx_q <= '0; fc_idx_q <= '0; fl_inflight_q <= 1'b0; fl_active_q <= 1'b0;
    end else begin
      fl_inflight_q <= fl_req && fl_gnt;
      if (start && !mode_sparse) begin
        fl_active_q <= 1'b1;
        fr_idx_q    <= '0;
        fc_idx_q    <= '0;
      end else begin
        if (fl_req && fl_gnt) fr_idx_q <= fr_idx_q + 1'b1;
        if (fl_pop) begin
          fc_idx_q <= fc_idx_q + 1'b1;
          if (int'(fc_idx_q) == FLN - 1) fl_active_q <= 1'b0;
        end
      end
    end
  end

  // ---- command ---------------------------------------------------------------------
  wire all_done = active_q && !start && (rq_q == R_DONE) && cs_done && if_empty &&
                  !if_inflight_q && !fl_active_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0; sparse_q <= 1'b0; m0_q <= '0; n0_q <= '0; kt_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active_q <= 1'b1;
        sparse_q <= mode_sparse;
        m0_q <= m0; n0_q <= n0; kt_q <= kt;
      end else if (all_done) begin
        active_q <= 1'b0;
        done     <= 1'b1;
      end
    end
  end
  assign busy = active_q;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !active_q);
  assert property (@(posedge clk) disable iff (!rst_n) !(if_rvalid && if_full));
  assert property (@(posedge clk) disable iff (!rst_n) !(fl_rvalid && fl_full));
endmodule
