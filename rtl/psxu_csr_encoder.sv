// psxu_csr_encoder: patch-wise CSR encoder of the PSXU.
// Each patch of the sparsity-augmented SAS bitmap is encoded on its own
// (local CSR), which the paper finds cheaper than one CSR for the whole
// bitmap. A 64-bit input word holds one row of 1, 2 or 4 patches (patch
// width 64, 32 or 16). For every patch row the encoder emits
//   - row_ptr: nonzeros in the earlier rows of that patch (CSR row pointer),
//     plus nnz, the count of this row, so the final pointer is known too;
//   - col_idx: the column of each set bit inside the patch, one per cycle.
// The row pointers of all patches in a SAS row are kept in a 64-entry
// accumulator table indexed by patch number (word_idx * patches_per_word +
// segment). band_start marks the first SAS row of a patch band: the
// accumulators of the patches in that word restart at zero.
// Interface: in_valid/in_ready word input; rp_valid pulses the cycle after
// a word is taken; col_valid/col_ready streams column indices lowest bit
// first. A word with k set bits occupies the encoder for max(k,1) cycles.
// The paper names the encoder and its outputs; the streaming format,
// handshake and accumulator table are this design's own.
module psxu_csr_encoder
  import sd_pkg::*;
#(
  parameter int unsigned PTR_W = 13   // up to 64x64 nonzeros per patch
) (
  input  logic             clk,
  input  logic             rst_n,
  // bitmap word input
  input  logic             in_valid,
  output logic             in_ready,
  input  patch_mode_e      mode,
  input  logic [5:0]       word_idx,     // 64-bit word position within the SAS row
  input  logic             band_start,
  input  logic [63:0]      bm_in,
  // row pointers of the patches of the accepted word
  output logic             rp_valid,
  output logic [2:0]       rp_count,     // patches in the word: 1, 2 or 4
  output logic [3:0][5:0]  rp_patch,     // patch number within the SAS row
  output logic [3:0][PTR_W-1:0] rp_ptr,
  output logic [3:0][6:0]  rp_nnz,
  // column index stream
  output logic             col_valid,
  input  logic             col_ready,
  output csr_col_t         col_out
);
  logic [PTR_W-1:0] acc [64];
  logic [63:0]      pend;
  patch_mode_e      pmode;
  logic [2:0]       ppw;
  logic [3:0][5:0]  pidx;
  logic [3:0][6:0]  cnt;
  logic             take;

  // patches per word and patch numbers of the incoming word
  always_comb begin
    unique case (mode)
      PATCH_64: ppw = 3'd1;
      PATCH_32: ppw = 3'd2;
      default:  ppw = 3'd4;
    endcase
    for (int s = 0; s < 4; s++) begin
      unique case (mode)
        PATCH_64: pidx[s] = word_idx;
        PATCH_32: pidx[s] = 6'((word_idx << 1) + 6'(s));
        default:  pidx[s] = 6'((word_idx << 2) + 6'(s));
      endcase
    end
    // population count of each patch row
    cnt = '0;
    for (int s = 0; s < 4; s++) begin
      for (int b = 0; b < 64; b++) begin
        if (bm_in[b] && (b / (64 / int'(ppw)) == s)) cnt[s] = cnt[s] + 7'd1;
      end
    end
  end

  assign in_ready = (pend == '0);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 64; i++) acc[i] <= '0;
      rp_valid <= 1'b0;
      rp_count <= '0;
      rp_patch <= '0;
      rp_ptr   <= '0;
      rp_nnz   <= '0;
    end else begin
      rp_valid <= take;
      if (take) begin
        rp_count <= ppw;
        for (int s = 0; s < 4; s++) begin
          if (s < int'(ppw)) begin
            rp_patch[s] <= pidx[s];
            rp_ptr[s]   <= band_start ? '0 : acc[pidx[s]];
            rp_nnz[s]   <= cnt[s];
            acc[pidx[s]] <= (band_start ? '0 : acc[pidx[s]]) + PTR_W'(cnt[s]);
          end else begin
            rp_patch[s] <= '0;
            rp_ptr[s]   <= '0;
            rp_nnz[s]   <= '0;
          end
        end
      end
    end
  end

  // column index serializer: lowest pending bit first
  logic [5:0] low;
  always_comb begin
    low = '0;
    for (int b = 63; b >= 0; b--) if (pend[b]) low = 6'(b);
  end

  always_comb begin
    col_valid = (pend != '0);
    unique case (pmode)
      PATCH_64: begin col_out.seg = 2'd0;      col_out.col = low;               end
      PATCH_32: begin col_out.seg = {1'b0, low[5]}; col_out.col = {1'b0, low[4:0]}; end
      default:  begin col_out.seg = low[5:4];  col_out.col = {2'b0, low[3:0]};  end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend  <= '0;
      pmode <= PATCH_64;
    end else if (take) begin
      pend  <= bm_in;
      pmode <= mode;
    end else if (col_valid && col_ready) begin
      pend[low] <= 1'b0;
    end
  end

  // a patch band needs at most 64 rows of 64 bits
  initial assert (PTR_W >= 13) else $error("psxu_csr_encoder: PTR_W too small");
endmodule
