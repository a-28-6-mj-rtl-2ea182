// simd_core: SIMD core of the processor. Three units share it:
//   - softmax with CLS-score (CAS) extraction and running min{CAS}
//     (cross-attention phase of TIPS, feeds the IPSU and the global memory).
//     The CAS of every pixel is also kept in a CAS buffer (one entry per
//     pixel); min{CAS} is only known after the last pixel, so on cas_send
//     the core first hands min{CAS} to the IPSU (ipsu_min_valid) and then
//     replays the buffered CAS values, one per cycle (ipsu_cas_valid).
//   - INT12/INT6 mixed-precision quantizer driven by the IPSU's important
//     pixel indices (FFN phase of TIPS, feeds the DBSC input memories)
//   - requantizer turning aggregated DBSC partial sums into 12-bit
//     activations for the global memory
// The units have independent ports and may work at the same time.
// The paper lists softmax, min{CAS}, mixed-precision quantization, on-chip
// quantization, activation functions and group normalization for this core;
// the last two are not built here. How each unit works is this design's.
module simd_core
  import sd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned LMAX  = 128,
  parameter int unsigned NPIX  = 4096,
  parameter int unsigned AGG_W = PSUM_W + 2,   // aggregated sum width: 24b + log2(cores)
  localparam int unsigned IDX_W = $clog2(NPIX)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // softmax
  input  logic                          sm_clear_min,
  input  logic                          sm_in_valid,
  output logic                          sm_in_ready,
  input  logic signed [15:0]            sm_in_score,
  input  logic                          sm_in_last,
  output logic                          sm_out_valid,
  output logic [11:0]                   sm_out_prob,
  output logic                          sm_out_cas,     // out_prob is a CAS
  output logic                          sm_out_last,
  output logic [11:0]                   sm_min_cas,
  // CAS hand-over to the IPSU
  input  logic                          cas_send,
  output logic                          cas_busy,
  output logic                          ipsu_min_valid,
  output logic [11:0]                   ipsu_min_cas,
  output logic                          ipsu_cas_valid,
  output logic [11:0]                   ipsu_cas,
  // mixed-precision quantizer
  input  logic                          mpq_start,
  input  logic                          mpq_tips_en,
  input  logic                          mpq_in_valid,
  input  logic [LANES-1:0][ACT_W-1:0]   mpq_in_act,
  input  logic [IDX_W:0]                mpq_imp_count,
  output logic [IDX_W-1:0]              mpq_idx_raddr,
  input  logic [IDX_W-1:0]              mpq_idx_rdata,
  output logic                          mpq_out_valid,
  output prec_e                         mpq_out_prec,
  output logic [LANES-1:0][ACT_W-1:0]   mpq_out_act,
  output logic [IDX_W-1:0]              mpq_out_pix,
  // requantizer
  input  logic [4:0]                    rq_shift,
  input  logic                          rq_in_valid,
  input  logic signed [LANES-1:0][AGG_W-1:0] rq_in_psum,
  output logic                          rq_out_valid,
  output logic [LANES-1:0][ACT_W-1:0]   rq_out_act
);
  simd_softmax #(.LMAX(LMAX)) u_sm (
    .clk, .rst_n,
    .clear_min(sm_clear_min),
    .in_valid (sm_in_valid), .in_ready(sm_in_ready),
    .in_score (sm_in_score), .in_last (sm_in_last),
    .out_valid(sm_out_valid), .out_prob(sm_out_prob),
    .out_first(sm_out_cas), .out_last(sm_out_last),
    .min_cas  (sm_min_cas)
  );

  // ---------------- CAS buffer and replay ----------------
  logic [11:0]  cas_buf [NPIX];
  logic [IDX_W:0] cas_n, cas_rd;
  always_ff @(posedge clk) begin
    if (sm_out_valid && sm_out_cas) cas_buf[cas_n[IDX_W-1:0]] <= sm_out_prob;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cas_n <= '0; cas_rd <= '0; cas_busy <= 1'b0;
      ipsu_min_valid <= 1'b0; ipsu_min_cas <= '0;
      ipsu_cas_valid <= 1'b0; ipsu_cas <= '0;
    end else begin
      ipsu_min_valid <= 1'b0;
      ipsu_cas_valid <= 1'b0;
      if (sm_clear_min) cas_n <= '0;
      else if (sm_out_valid && sm_out_cas && cas_n < (IDX_W+1)'(NPIX)) cas_n <= cas_n + 1'b1;
      if (cas_send && !cas_busy) begin
        cas_busy       <= 1'b1;
        cas_rd         <= '0;
        ipsu_min_valid <= 1'b1;
        ipsu_min_cas   <= sm_min_cas;
      end else if (cas_busy) begin
        if (cas_rd == cas_n) cas_busy <= 1'b0;
        else begin
          ipsu_cas_valid <= 1'b1;
          ipsu_cas       <= cas_buf[cas_rd[IDX_W-1:0]];
          cas_rd         <= cas_rd + 1'b1;
        end
      end
    end
  end

  simd_mpq #(.LANES(LANES), .NPIX(NPIX)) u_mpq (
    .clk, .rst_n,
    .start(mpq_start), .tips_en(mpq_tips_en),
    .in_valid(mpq_in_valid), .in_act(mpq_in_act),
    .imp_count(mpq_imp_count), .idx_raddr(mpq_idx_raddr), .idx_rdata(mpq_idx_rdata),
    .out_valid(mpq_out_valid), .out_prec(mpq_out_prec),
    .out_act(mpq_out_act), .out_pix(mpq_out_pix)
  );

  simd_requant #(.LANES(LANES), .IW(AGG_W)) u_rq (
    .clk, .rst_n,
    .shift(rq_shift),
    .in_valid(rq_in_valid), .in_psum(rq_in_psum),
    .out_valid(rq_out_valid), .out_act(rq_out_act)
  );
endmodule
