// attention_core: attention core of the processor.
// Two engines:
//   QK engine: dot product of a query and a key, 16 signed 12-bit lanes per
//     cycle, accumulated over the head dimension; on qk_last the score is
//     shifted right by qk_shift and saturated to signed 16 bits (Q8.8), the
//     format the SIMD softmax takes.
//   SV engine with input skipping: self-attention scores come in PSXU
//     compressed form (CSR column indices per 64-bit word plus the stream of
//     nonzero score values in order). The CSR decoder rebuilds each word's
//     pruned bitmap; only its set bits are visited, one per cycle: the value
//     stream is popped, the value row V[64*word_idx + b] is fetched, and
//     score * V is accumulated into 16 lanes. Zero scores cost no cycle and
//     no V fetch. With row_last on a word, the finished output row is
//     presented on sv_out_* and the accumulators clear.
// The paper says the core supports input skipping with a CSR decoder; the
// engines' organisation, formats and timing are this design's.
// Timing: V read port is synchronous (data the cycle after v_re); a word
// with k set bits takes k + 1 cycles after its bitmap is decoded.
module attention_core
  import sd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // QK engine
  input  logic                            qk_valid,
  input  logic signed [LANES-1:0][11:0]   qk_q,
  input  logic signed [LANES-1:0][11:0]   qk_k,
  input  logic                            qk_last,
  input  logic [4:0]                      qk_shift,
  output logic                            score_valid,
  output logic signed [15:0]              score,
  // SV engine: compressed score input
  input  patch_mode_e                     sv_mode,
  input  logic                            sv_row_start,
  input  logic                            sv_row_last,
  input  logic [5:0]                      sv_word_idx,
  input  logic                            cb_valid,
  output logic                            cb_ready,
  input  logic                            cb_has,
  input  csr_col_t                        cb_col,
  input  logic                            cb_last,
  input  logic                            val_valid,
  output logic                            val_ready,
  input  logic [11:0]                     val_data,
  // value matrix read port
  output logic                            v_re,
  output logic [11:0]                     v_raddr,
  input  logic signed [LANES-1:0][11:0]   v_rdata,
  // output row
  output logic                            sv_out_valid,
  output logic signed [LANES-1:0][ACC_W-1:0] sv_out,
  output logic [31:0]                     skipped       // zero scores skipped
);
  // ---------------- QK engine ----------------
  logic signed [ACC_W-1:0] qk_acc;
  logic signed [ACC_W-1:0] qk_dot;
  always_comb begin
    qk_dot = '0;
    for (int l = 0; l < int'(LANES); l++) qk_dot = qk_dot + ACC_W'($signed(qk_q[l])) * ACC_W'($signed(qk_k[l]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qk_acc <= '0; score_valid <= 1'b0; score <= '0;
    end else begin
      score_valid <= 1'b0;
      if (qk_valid) begin
        if (qk_last) begin
          logic signed [ACC_W-1:0] t;
          t = (qk_acc + qk_dot) >>> qk_shift;
          score_valid <= 1'b1;
          score  <= (t > 32767) ? 16'sd32767 : (t < -32768) ? -16'sd32768 : t[15:0];
          qk_acc <= '0;
        end else begin
          qk_acc <= qk_acc + qk_dot;
        end
      end
    end
  end

  // ---------------- SV engine ----------------
  logic        wv, wr;
  logic [63:0] wbm;
  attn_csr_decoder u_dec (
    .clk, .rst_n,
    .mode(sv_mode), .row_start(sv_row_start),
    .cb_valid, .cb_ready, .cb_has, .cb_col, .cb_last,
    .word_valid(wv), .word_ready(wr), .word_bitmap(wbm)
  );

  // word context travels with the decoded word: sample it with the last beat
  logic [5:0]  widx_d, widx_q;
  logic        rlast_d, rlast_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin widx_d <= '0; rlast_d <= 1'b0; end
    else if (cb_valid && cb_ready && cb_last) begin
      widx_d <= sv_word_idx; rlast_d <= sv_row_last;
    end
  end

  logic [63:0] todo;
  logic        busy;
  logic [5:0]  low;
  always_comb begin
    low = '0;
    for (int b = 63; b >= 0; b--) if (todo[b]) low = 6'(b);
  end

  assign wr        = !busy;
  assign val_ready = busy && (todo != '0);
  assign v_re      = val_ready && val_valid;
  assign v_raddr   = {widx_q, low};

  logic        mac_v;
  logic [11:0] mac_s;
  logic        fin_pending;
  logic signed [LANES-1:0][ACC_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      todo <= '0; busy <= 1'b0; widx_q <= '0; rlast_q <= 1'b0;
      mac_v <= 1'b0; mac_s <= '0; fin_pending <= 1'b0;
      acc <= '0; sv_out_valid <= 1'b0; sv_out <= '0; skipped <= '0;
    end else begin
      sv_out_valid <= 1'b0;
      mac_v <= 1'b0;
      if (wv && wr) begin
        todo    <= wbm;
        busy    <= 1'b1;
        widx_q  <= widx_d;
        rlast_q <= rlast_d;
        skipped <= skipped + 32'(64 - $countones(wbm));
      end else if (busy) begin
        if (todo != '0) begin
          if (val_valid) begin
            todo[low] <= 1'b0;
            mac_v <= 1'b1;
            mac_s <= val_data;
          end
        end else if (!mac_v) begin
          // word finished once its last product is in
          busy <= 1'b0;
          fin_pending <= rlast_q;
        end
      end
      // multiply-accumulate with the V row fetched last cycle
      if (mac_v) begin
        for (int l = 0; l < int'(LANES); l++)
          acc[l] <= $signed(acc[l]) + ACC_W'($signed({1'b0, mac_s})) * ACC_W'($signed(v_rdata[l]));
      end
      if (fin_pending) begin
        fin_pending  <= 1'b0;
        sv_out_valid <= 1'b1;
        sv_out       <= acc;
        acc          <= '0;
      end
    end
  end
endmodule
