// psxu_rxu: reconfigurable XOR unit (RXU) of the PSXU.
// Patch similarity-based XOR: each row of a SAS patch is XORed with the
// same row of the patch to its left, which raises bitmap sparsity because
// adjacent patches look alike. The 64-bit input word is four 16-bit
// segments; four 16-bit registers hold the previous word, and a 3:1 mux per
// segment picks the "left neighbour" for the patch size in use:
//   PATCH_64 (sel 0): one 64-bit patch per word, neighbour = previous word
//   PATCH_32 (sel 1): two 32-bit patches, the low one pairs with the upper
//                     half of the previous word, the high one with the low
//                     half of this word
//   PATCH_16 (sel 2): four 16-bit patches, segment k pairs with segment k-1,
//                     segment 0 with segment 3 of the previous word.
// The register/mux/XOR structure and the three modes are the paper's; the
// mux input order and the row_start input are this design's choices:
// row_start marks the first word of a SAS row, whose first patch has no
// left neighbour and passes unchanged (XOR with zero).
// Timing: combinational from bm_in to bm_out; the registers load on in_valid.
module psxu_rxu
  import sd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  patch_mode_e mode,
  input  logic        row_start,
  input  logic [63:0] bm_in,
  output logic        out_valid,
  output logic [63:0] bm_out
);
  logic [3:0][15:0] cur, prv, prv_g, nb;

  assign cur = bm_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prv <= '0;
    else if (in_valid) prv <= cur;
  end

  always_comb begin
    prv_g = row_start ? '0 : prv;
    // segment 0
    unique case (mode)
      PATCH_64: nb[0] = prv_g[0];
      PATCH_32: nb[0] = prv_g[2];
      default:  nb[0] = prv_g[3];
    endcase
    // segment 1
    unique case (mode)
      PATCH_64: nb[1] = prv_g[1];
      PATCH_32: nb[1] = prv_g[3];
      default:  nb[1] = cur[0];
    endcase
    // segment 2
    unique case (mode)
      PATCH_64: nb[2] = prv_g[2];
      PATCH_32: nb[2] = cur[0];
      default:  nb[2] = cur[1];
    endcase
    // segment 3
    unique case (mode)
      PATCH_64: nb[3] = prv_g[3];
      PATCH_32: nb[3] = cur[1];
      default:  nb[3] = cur[2];
    endcase
    for (int k = 0; k < 4; k++) bm_out[16*k +: 16] = cur[k] ^ nb[k];
  end

  assign out_valid = in_valid;
endmodule
