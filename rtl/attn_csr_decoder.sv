// attn_csr_decoder: CSR decoder of the attention core.
// Reverses the PSXU compression of one 64-bit word of a self-attention
// score bitmap: the column indices of the word (one beat each, the last beat
// flagged; a word without set bits is a single beat with has = 0) are
// collected into the sparsity-augmented bitmap, and the patch XOR is undone
// segment by segment. For 32- and 16-wide patches a segment's left
// neighbour lies in the same word and is itself decoded first, so the
// segments are recovered in order 0..3. Four 16-bit registers keep the
// previous decoded word, as in the encoder; row_start marks the first word
// of a SAS row (no left neighbour).
// Timing: the decoded bitmap appears with word_valid in the cycle after
// the last beat; beats are accepted whenever the consumer has taken the
// previous word (cb_ready = !word_valid || word_ready).
module attn_csr_decoder
  import sd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  patch_mode_e mode,
  input  logic        row_start,
  input  logic        cb_valid,
  output logic        cb_ready,
  input  logic        cb_has,
  input  csr_col_t    cb_col,
  input  logic        cb_last,
  output logic        word_valid,
  input  logic        word_ready,
  output logic [63:0] word_bitmap
);
  logic [63:0] aug;
  logic [3:0][15:0] prv, prv_g, a, o;
  logic [5:0]  pos;
  logic [63:0] aug_n;

  assign cb_ready = !word_valid || word_ready;

  // bit position of the beat inside the word
  always_comb begin
    unique case (mode)
      PATCH_64: pos = cb_col.col;
      PATCH_32: pos = {cb_col.seg[0], cb_col.col[4:0]};
      default:  pos = {cb_col.seg, cb_col.col[3:0]};
    endcase
    aug_n = aug;
    if (cb_has) aug_n[pos] = 1'b1;
  end

  // inverse XOR
  always_comb begin
    a = aug_n;
    prv_g = row_start ? '0 : prv;
    unique case (mode)
      PATCH_64: for (int k = 0; k < 4; k++) o[k] = a[k] ^ prv_g[k];
      PATCH_32: begin
        o[0] = a[0] ^ prv_g[2];
        o[1] = a[1] ^ prv_g[3];
        o[2] = a[2] ^ o[0];
        o[3] = a[3] ^ o[1];
      end
      default: begin
        o[0] = a[0] ^ prv_g[3];
        o[1] = a[1] ^ o[0];
        o[2] = a[2] ^ o[1];
        o[3] = a[3] ^ o[2];
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aug <= '0; prv <= '0; word_valid <= 1'b0; word_bitmap <= '0;
    end else begin
      if (word_valid && word_ready) word_valid <= 1'b0;
      if (cb_valid && cb_ready) begin
        if (cb_last) begin
          aug         <= '0;
          word_valid  <= 1'b1;
          word_bitmap <= o;
          prv         <= o;
        end else begin
          aug <= aug_n;
        end
      end
    end
  end
endmodule
