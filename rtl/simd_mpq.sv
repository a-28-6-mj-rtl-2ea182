// simd_mpq: INT12/INT6 mixed-precision quantizer of the SIMD core (FFN
// phase of TIPS). Activation vectors of pixels 0, 1, 2, ... arrive from the
// global memory in pixel order. The important-pixel indices stored by the
// IPSU are in increasing order, so a pointer walks that list alongside the
// pixel stream: pixel p is important when the entry under the pointer
// equals p. Important pixels (and every pixel when tips_en is low, as in
// the last diffusion iterations) pass as INT12; the others are rounded to
// INT6: q = min(63, (x + 32) >> 6), kept in the low 6 bits of the lane.
// The rounding rule is this design's choice. Output registered, 1 cycle.
module simd_mpq
  import sd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned NPIX  = 4096,
  localparam int unsigned IDX_W = $clog2(NPIX)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,        // new pass: pixel 0 next
  input  logic                        tips_en,
  input  logic                        in_valid,
  input  logic [LANES-1:0][ACT_W-1:0] in_act,
  // important-index list of the IPSU
  input  logic [IDX_W:0]              imp_count,
  output logic [IDX_W-1:0]            idx_raddr,
  input  logic [IDX_W-1:0]            idx_rdata,
  output logic                        out_valid,
  output prec_e                       out_prec,
  output logic [LANES-1:0][ACT_W-1:0] out_act,
  output logic [IDX_W-1:0]            out_pix
);
  logic [IDX_W:0]   ptr;
  logic [IDX_W-1:0] pix;
  logic             hit;

  assign idx_raddr = ptr[IDX_W-1:0];
  assign hit       = (ptr < imp_count) && (idx_rdata == pix);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; pix <= '0;
      out_valid <= 1'b0; out_prec <= PREC_HI; out_act <= '0; out_pix <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        ptr <= '0; pix <= '0;
      end else if (in_valid) begin
        out_valid <= 1'b1;
        out_pix   <= pix;
        pix       <= pix + 1'b1;
        if (hit) ptr <= ptr + 1'b1;
        if (hit || !tips_en) begin
          out_prec <= PREC_HI;
          out_act  <= in_act;
        end else begin
          out_prec <= PREC_LO;
          for (int l = 0; l < int'(LANES); l++) begin
            logic [ACT_W:0] r;
            r = ({1'b0, in_act[l]} + 13'd32) >> 6;
            out_act[l] <= (r > 13'd63) ? 12'd63 : r[ACT_W-1:0];
          end
        end
      end
    end
  end
endmodule
