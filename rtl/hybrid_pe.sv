// hybrid_pe: processing element that runs both the dense LSB4 pass and the
// sparse MSB4 pass on one shared set of Int4 x Int4 MACs (paper Fig. 4(b)).
//
// Register files (this design's split of the paper's 224 B per PE):
//   IF LSB4 RF   KT nibbles       (16 B)   dense, unsigned 0..15
//   IF MSB4 RF   KT nibbles       (16 B)   compressed: entry i = i-th non-zero MSB4
//   PBM RF       KT bits          ( 4 B)   bit c = channel c has a non-zero MSB4
//   FL RF        OCS x KT nibbles (128 B)  signed Int4 weights, one row per output
//   OF RF        OCS x Int32      (32 B)   output-stationary accumulators
// Total 196 B.
//
// The PE owns OCS output channels of one token. A pass walks the OCS outputs;
// for each it spends one cycle per group of MACS operands and adds the sum of
// the MACS products to that output's accumulator.
//   Dense pass  (start_dense):  operands are LSB4[c] x FL[o][c] for all KT
//     channels; OCS*KT/MACS cycles (8*4 = 32). The sparsity logic is bypassed.
//   Sparse pass (start_sparse): the one-sided sparsity logic maps compressed
//     entry i to its channel (position of the i-th set PBM bit) and pairs
//     MSB4[i] with FL[o][that channel]; only valid operands reach the MACs.
//     The sum is shifted left by four bits before it is accumulated, so that
//     dense + sparse = Int8 x Int4. OCS*ceil(nnz/MACS) cycles; with no
//     non-zero MSB4 the pass takes no cycle at all.
// LSB4 is taken as unsigned and MSB4 as signed, so 16*MSB4 + LSB4 is the
// two's-complement Int8 value. The MAC is modelled as one cycle with a
// combinational adder tree (the paper pipelines it but gives no depth).
// RF writes (whole rows, from the column buffers) may happen while a pass
// runs on other registers; the controller never overwrites a row in use.
// Int2 weights are held sign-extended in the Int4 FL RF.
// With a_signed set (Int4-activation mode, the paper's Int4 x Int4 /
// Int4 x Int2 single-round precisions) the LSB4 RF holds signed Int4
// activations and only the dense pass is run.
module hybrid_pe #(
  parameter int unsigned KT   = 32,
  parameter int unsigned OCS  = 8,
  parameter int unsigned MACS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // register-file writes
  input  logic                     a_signed,   // 1: LSB4 RF holds signed Int4 activations
  input  logic                     lsb_we,
  input  logic [KT*4-1:0]          lsb_wdata,
  input  logic                     pbm_we,
  input  logic [KT-1:0]            pbm_wdata,
  input  logic                     msb_we,
  input  logic [KT*4-1:0]          msb_wdata,
  input  logic                     fl_we,
  input  logic [$clog2(OCS)-1:0]   fl_wsel,
  input  logic [KT*4-1:0]          fl_wdata,
  // control
  input  logic                     of_clear,
  input  logic                     start_dense,
  input  logic                     start_sparse,
  output logic                     busy,
  output logic                     sparse_skipped,  // pulse: sparse pass had nothing to do
  // drain
  output logic signed [31:0]       of_out [OCS]
);
  localparam int unsigned CHUNKS = KT / MACS;
  localparam int unsigned CW     = $clog2(CHUNKS + 1);
  localparam int unsigned IW     = $clog2(KT);

  typedef enum logic [1:0] {S_IDLE, S_DENSE, S_SPARSE} pe_state_e;

  logic [KT*4-1:0]  lsb_q, msb_q;
  logic [KT-1:0]    pbm_q;
  logic [KT*4-1:0]  fl_q [OCS];
  logic signed [31:0] of_q [OCS];

  pe_state_e             state_q;
  logic [$clog2(OCS)-1:0] oc_q;
  logic [CW-1:0]          chunk_q, nchunk_q;

  // ---- one-sided sparsity logic: compressed index -> channel --------------
  logic [IW-1:0]     pos_of [KT];
  logic [IW:0]       nnz;
  always_comb begin
    int unsigned n;
    n = 0;
    for (int j = 0; j < KT; j++) pos_of[j] = '0;
    for (int c = 0; c < KT; c++) begin
      if (pbm_q[c]) begin
        pos_of[n[IW-1:0]] = IW'(c);
        n = n + 1;
      end
    end
    nnz = (IW+1)'(n);
  end

  // ---- shared MACs with adder tree ------------------------------------------
  logic signed [31:0] mac_sum;
  always_comb begin
    mac_sum = '0;
    for (int l = 0; l < MACS; l++) begin
      int unsigned idx;
      logic signed [4:0] a;
      logic signed [3:0] w;
      idx = int'(chunk_q) * MACS + l;
      a = '0;
      w = '0;
      if (state_q == S_DENSE) begin
        a = {a_signed & lsb_q[idx*4 + 3], lsb_q[idx*4 +: 4]};
        w = fl_q[oc_q][idx*4 +: 4];
      end else if (state_q == S_SPARSE && idx < int'(nnz)) begin
        a = {msb_q[idx*4 + 3], msb_q[idx*4 +: 4]};
        w = fl_q[oc_q][int'(pos_of[idx])*4 +: 4];
      end
      mac_sum = mac_sum + 32'(a * w);
    end
    if (state_q == S_SPARSE) mac_sum = mac_sum <<< 4;
  end

  assign busy   = (state_q != S_IDLE);
  assign of_out = of_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lsb_q <= '0; msb_q <= '0; pbm_q <= '0;
      for (int o = 0; o < OCS; o++) begin
        fl_q[o] <= '0;
        of_q[o] <= '0;
      end
      state_q  <= S_IDLE;
      oc_q     <= '0;
      chunk_q  <= '0;
      nchunk_q <= '0;
      sparse_skipped <= 1'b0;
    end else begin
      sparse_skipped <= 1'b0;
      if (lsb_we) lsb_q <= lsb_wdata;
      if (msb_we) msb_q <= msb_wdata;
      if (pbm_we) pbm_q <= pbm_wdata;
      if (fl_we)  fl_q[fl_wsel] <= fl_wdata;

      if (of_clear) begin
        for (int o = 0; o < OCS; o++) of_q[o] <= '0;
      end else if (state_q != S_IDLE) begin
        of_q[oc_q] <= of_q[oc_q] + mac_sum;
      end

      unique case (state_q)
        S_IDLE: begin
          oc_q    <= '0;
          chunk_q <= '0;
          if (start_dense) begin
            state_q  <= S_DENSE;
            nchunk_q <= CW'(CHUNKS);
          end else if (start_sparse) begin
            if (nnz == 0) sparse_skipped <= 1'b1;
            else begin
              state_q  <= S_SPARSE;
              nchunk_q <= CW'((int'(nnz) + MACS - 1) / MACS);
            end
          end
        end
        default: begin
          if (chunk_q == nchunk_q - 1'b1) begin
            chunk_q <= '0;
            if (int'(oc_q) == OCS - 1) state_q <= S_IDLE;
            else                       oc_q    <= oc_q + 1'b1;
          end else begin
            chunk_q <= chunk_q + 1'b1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(start_dense || start_sparse));
  assert property (@(posedge clk) disable iff (!rst_n) !(start_dense && start_sparse));
endmodule
