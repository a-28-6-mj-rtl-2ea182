// psxu: patch similarity-based XOR unit.
// Compresses self-attention scores (SAS) before they leave the chip:
// 64 pruned 12-bit scores of one SAS row enter per cycle; the bitmap
// generator unit (BGU) turns them into a 64-bit nonzero bitmap (1 cycle),
// the reconfigurable XOR unit (RXU) XORs each patch row with its left
// neighbour patch, and the CSR encoder emits per-patch row pointers and
// column indices of the sparsity-augmented bitmap.
// The structure BGU -> RXU -> CSR encoder is the paper's. Side information
// (mode, row_start, band_start, word_idx) travels with the word through the
// BGU register. The input stalls (in_ready low) while the CSR encoder is
// busy serializing column indices; the BGU register then holds its word.
// rst_n also disables the protocol assertion below; lint reports that as a
// synchronous use of the asynchronous reset, which is harmless.
module psxu
  import sd_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LANES-1:0][DW-1:0] sas_in,
  input  patch_mode_e              mode,
  input  logic                     row_start,
  input  logic                     band_start,
  input  logic [5:0]               word_idx,
  output logic                     aug_valid,    // sparsity-augmented bitmap (observation)
  output logic [63:0]              aug_bitmap,
  output logic                     rp_valid,
  output logic [2:0]               rp_count,
  output logic [3:0][5:0]          rp_patch,
  output logic [3:0][12:0]         rp_ptr,
  output logic [3:0][6:0]          rp_nnz,
  output logic                     col_valid,
  input  logic                     col_ready,
  output csr_col_t                 col_out
);
  logic             bgu_valid, bgu_take;
  logic [63:0]      bitmap;
  patch_mode_e      mode_q;
  logic             row_start_q, band_start_q;
  logic [5:0]       word_idx_q;
  logic             enc_ready;
  logic             stage_full;

  // the BGU output register is one pipeline stage: it may take a new word
  // when empty or when the encoder takes the word it holds
  assign in_ready = !stage_full || enc_ready;
  assign bgu_take = in_valid && in_ready;

  psxu_bgu #(.LANES(LANES), .DW(DW)) u_bgu (
    .clk, .rst_n,
    .in_valid (bgu_take),
    .sas_in,
    .out_valid(bgu_valid),
    .bitmap
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_full   <= 1'b0;
      mode_q       <= PATCH_64;
      row_start_q  <= 1'b0;
      band_start_q <= 1'b0;
      word_idx_q   <= '0;
    end else begin
      if (bgu_take) begin
        stage_full   <= 1'b1;
        mode_q       <= mode;
        row_start_q  <= row_start;
        band_start_q <= band_start;
        word_idx_q   <= word_idx;
      end else if (enc_ready) begin
        stage_full   <= 1'b0;
      end
    end
  end

  logic rxu_valid;
  psxu_rxu u_rxu (
    .clk, .rst_n,
    .in_valid (stage_full && enc_ready),
    .mode     (mode_q),
    .row_start(row_start_q),
    .bm_in    (bitmap),
    .out_valid(rxu_valid),
    .bm_out   (aug_bitmap)
  );
  assign aug_valid = rxu_valid;

  psxu_csr_encoder #(.PTR_W(13)) u_csr (
    .clk, .rst_n,
    .in_valid  (rxu_valid),
    .in_ready  (enc_ready),
    .mode      (mode_q),
    .word_idx  (word_idx_q),
    .band_start(band_start_q),
    .bm_in     (aug_bitmap),
    .rp_valid, .rp_count, .rp_patch, .rp_ptr, .rp_nnz,
    .col_valid, .col_ready, .col_out
  );

  // bgu_valid mirrors stage_full on the first cycle; kept for the figure's
  // register and checked here
  assert property (@(posedge clk) disable iff (!rst_n) bgu_valid |-> stage_full);
  initial assert (LANES == 64) else $error("psxu: RXU and CSR encoder are built for 64 lanes");
endmodule
