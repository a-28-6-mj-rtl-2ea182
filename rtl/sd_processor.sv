// sd_processor: stable diffusion processor top.
// Units: 4 DBSC clusters (4 dual-mode bit-slice cores + aggregation core
// each), the patch similarity-based XOR unit (PSXU), the important pixel
// spotting unit (IPSU), a 192 KB global memory, the attention core and the
// SIMD core. The units are wired along the data paths of the TIPS flow:
//   cross-attention phase: attention core QK engine -> SIMD softmax ->
//     (probabilities, packed 16 per word) global memory; CAS -> SIMD CAS
//     buffer -> (min{CAS}, then every CAS) IPSU.
//   FFN phase: global memory -> SIMD mixed-precision quantizer (reads the
//     IPSU's important indices) -> dispatcher -> IMEM of the selected DBSC.
//     INT12 pixels are written upward from IMEM word 0, INT6 pixels upward
//     from word lo_base, so each precision is run as its own DBSC pass.
//   DBSC cluster output -> SIMD requantizer -> global memory.
//   Self-attention: pruned scores -> PSXU -> compressed stream (ports);
//     compressed stream (ports) -> attention core SV engine, which fetches
//     value rows from the global memory.
// The top controller and the 2-D mesh NoC are not built (the paper does not
// describe them): their work is done through the ports below, which give
// the host or a controller the command inputs of each unit, a host write
// port into the global memory, WMEM/IMEM write ports, and the results.
// Global memory write port priority: host, then requantizer, then softmax.
// Global memory read port: attention SV engine when sv_active, else host /
// quantizer reads (gm_re; the word goes to the quantizer when gm_to_mpq).
// Lint notes: the attention core's zero-skip counter, the quantizer's pixel
// number and the IPSU's per-pixel flag are left unconnected, and the
// softmax's CAS flag and min{CAS} outputs are unused here, because the SIMD
// core already routes CAS and min{CAS} to the IPSU and the counts the host
// needs (imp_count, pix_count, disp_*_cnt) are ports. rst_n is also used in
// the overrun assertion's disable clause, which lint reports as a
// synchronous use of the asynchronous reset.
module sd_processor
  import sd_pkg::*;
#(
  parameter int unsigned NCLUSTER   = 4,
  parameter int unsigned NCORE      = 4,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned OMEM_DEPTH = 256,
  parameter int unsigned GMEM_KB    = 192,
  parameter int unsigned NPIX       = 4096,
  parameter int unsigned LMAX       = 128,
  localparam int unsigned GAW   = $clog2(GMEM_KB * 1024 / 24),
  localparam int unsigned IDX_W = $clog2(NPIX),
  localparam int unsigned IA    = $clog2(IMEM_DEPTH),
  localparam int unsigned OA    = $clog2(OMEM_DEPTH),
  localparam int unsigned CW    = (NCLUSTER > 1) ? $clog2(NCLUSTER) : 1,
  localparam int unsigned KW    = (NCORE > 1) ? $clog2(NCORE) : 1,
  localparam int unsigned AGG_W = PSUM_W + $clog2(NCORE)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // ---- host access to the global memory ----
  input  logic                                 gm_we,
  input  logic [GAW-1:0]                       gm_waddr,
  input  logic [15:0][ACT_W-1:0]               gm_wdata,
  input  logic                                 gm_re,
  input  logic [GAW-1:0]                       gm_raddr,
  input  logic                                 gm_to_mpq,
  output logic [15:0][ACT_W-1:0]               gm_rdata,
  // ---- cross-attention: QK engine and softmax ----
  input  logic                                 qk_valid,
  input  logic signed [15:0][11:0]             qk_q,
  input  logic signed [15:0][11:0]             qk_k,
  input  logic                                 qk_last,
  input  logic                                 qk_row_last,  // with qk_last: last key of the row
  input  logic [4:0]                           qk_shift,
  output logic                                 sm_ready,
  input  logic                                 sm_clear,     // new image: clear min{CAS}, CAS buffer
  input  logic [GAW-1:0]                       sm_gm_base,   // where packed probabilities go
  // ---- TIPS ----
  input  logic                                 cas_send,
  output logic                                 cas_busy,
  input  logic                                 ipsu_start,
  input  logic [11:0]                          ipsu_margin,
  output logic [IDX_W:0]                       imp_count,
  output logic [IDX_W:0]                       pix_count,
  input  logic                                 mpq_start,
  input  logic                                 tips_en,
  input  logic [CW-1:0]                        disp_cluster,
  input  logic [KW-1:0]                        disp_core,
  input  logic [IA-1:0]                        disp_lo_base,
  output logic [IA:0]                          disp_hi_cnt,
  output logic [IA:0]                          disp_lo_cnt,
  // ---- DBSC clusters ----
  input  logic [CW-1:0]                        wr_cluster,
  input  logic [KW-1:0]                        wr_core,
  input  logic                                 imem_we,
  input  logic [IA-1:0]                        imem_waddr,
  input  logic [15:0][ACT_W-1:0]               imem_wdata,
  input  logic                                 wmem_we,
  input  logic [3:0]                           wmem_wset,
  input  logic [3:0]                           wmem_wrow,
  input  logic signed [15:0][WGT_W-1:0]        wmem_wdata,
  input  logic [NCLUSTER-1:0]                  dbsc_start,
  input  stat_mode_e                           dbsc_mode,
  input  prec_e                                dbsc_prec,
  input  logic                                 dbsc_acc,
  input  logic [3:0]                           dbsc_wset,
  input  logic [IA-1:0]                        dbsc_in_base,
  input  logic [OA-1:0]                        dbsc_out_base,
  input  logic [OA:0]                          dbsc_n_steps,
  output logic [NCLUSTER-1:0]                  dbsc_busy,
  output logic [NCLUSTER-1:0]                  dbsc_done,
  input  logic                                 agg_re,
  input  logic [CW-1:0]                        agg_cluster,
  input  logic [OA-1:0]                        agg_raddr,
  output logic                                 agg_valid,
  output logic signed [15:0][AGG_W-1:0]        agg_data,
  input  logic [4:0]                           rq_shift,
  input  logic                                 rq_to_gm,
  input  logic [GAW-1:0]                       rq_gm_addr,   // first word; increments per result
  // ---- PSXU ----
  input  logic                                 sas_valid,
  output logic                                 sas_ready,
  input  logic [63:0][11:0]                    sas_data,
  input  patch_mode_e                          sas_mode,
  input  logic                                 sas_row_start,
  input  logic                                 sas_band_start,
  input  logic [5:0]                           sas_word_idx,
  output logic                                 aug_valid,
  output logic [63:0]                          aug_bitmap,
  output logic                                 rp_valid,
  output logic [2:0]                           rp_count,
  output logic [3:0][5:0]                      rp_patch,
  output logic [3:0][12:0]                     rp_ptr,
  output logic [3:0][6:0]                      rp_nnz,
  output logic                                 col_valid,
  input  logic                                 col_ready,
  output csr_col_t                             col_out,
  // ---- attention SV engine ----
  input  logic                                 sv_active,
  input  logic [GAW-1:0]                       sv_v_base,
  input  patch_mode_e                          sv_mode,
  input  logic                                 sv_row_start,
  input  logic                                 sv_row_last,
  input  logic [5:0]                           sv_word_idx,
  input  logic                                 cb_valid,
  output logic                                 cb_ready,
  input  logic                                 cb_has,
  input  csr_col_t                             cb_col,
  input  logic                                 cb_last,
  input  logic                                 val_valid,
  output logic                                 val_ready,
  input  logic [11:0]                          val_data,
  output logic                                 sv_out_valid,
  output logic signed [15:0][31:0]             sv_out
);
  typedef logic [15:0][ACT_W-1:0] word_t;

  // ================= global memory =================
  logic          g_we, g_re;
  logic [GAW-1:0] g_waddr, g_raddr;
  word_t         g_wdata, g_rdata;

  global_memory #(.KBYTES(GMEM_KB), .LANES(16)) u_gmem (
    .clk,
    .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .re(g_re), .raddr(g_raddr), .rdata(g_rdata)
  );
  assign gm_rdata = g_rdata;

  // ================= attention core =================
  logic               score_valid;
  logic signed [15:0] score;
  logic               v_re;
  logic [11:0]        v_raddr;

  attention_core #(.LANES(16), .ACC_W(32)) u_attn (
    .clk, .rst_n,
    .qk_valid, .qk_q, .qk_k, .qk_last, .qk_shift,
    .score_valid, .score,
    .sv_mode, .sv_row_start, .sv_row_last, .sv_word_idx,
    .cb_valid, .cb_ready, .cb_has, .cb_col, .cb_last,
    .val_valid, .val_ready, .val_data,
    .v_re, .v_raddr, .v_rdata(g_rdata),
    .sv_out_valid, .sv_out,
    .skipped()
  );

  // the row end travels with the score
  logic score_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) score_last <= 1'b0;
    else if (qk_valid && qk_last) score_last <= qk_row_last;
  end

  // ================= SIMD core =================
  logic        sm_out_valid, sm_out_cas, sm_out_last;
  logic [11:0] sm_out_prob, sm_min_cas;
  logic        ipsu_min_valid, ipsu_cas_valid;
  logic [11:0] ipsu_min_cas, ipsu_cas;
  logic [IDX_W-1:0] idx_raddr, idx_rdata;
  logic        mpq_in_valid, mpq_out_valid;
  prec_e       mpq_out_prec;
  word_t       mpq_out_act;
  logic        rq_in_valid, rq_out_valid;
  logic signed [15:0][AGG_W-1:0] rq_in_psum;
  word_t       rq_out_act;

  simd_core #(.LANES(16), .LMAX(LMAX), .NPIX(NPIX), .AGG_W(AGG_W)) u_simd (
    .clk, .rst_n,
    .sm_clear_min (sm_clear),
    .sm_in_valid  (score_valid),
    .sm_in_ready  (sm_ready),
    .sm_in_score  (score),
    .sm_in_last   (score_last),
    .sm_out_valid, .sm_out_prob, .sm_out_cas, .sm_out_last, .sm_min_cas,
    .cas_send, .cas_busy,
    .ipsu_min_valid, .ipsu_min_cas, .ipsu_cas_valid, .ipsu_cas,
    .mpq_start, .mpq_tips_en(tips_en),
    .mpq_in_valid, .mpq_in_act(g_rdata),
    .mpq_imp_count(imp_count),
    .mpq_idx_raddr(idx_raddr), .mpq_idx_rdata(idx_rdata),
    .mpq_out_valid, .mpq_out_prec, .mpq_out_act, .mpq_out_pix(),
    .rq_shift, .rq_in_valid, .rq_in_psum,
    .rq_out_valid, .rq_out_act
  );

  // ================= IPSU =================
  ipsu #(.CAS_W(12), .NPIX(NPIX)) u_ipsu (
    .clk, .rst_n,
    .start    (ipsu_start),
    .margin   (ipsu_margin),
    .min_valid(ipsu_min_valid), .min_cas(ipsu_min_cas),
    .cas_valid(ipsu_cas_valid), .cas_in(ipsu_cas),
    .important(),
    .imp_count, .pix_count,
    .idx_raddr, .idx_rdata
  );

  // ================= softmax output packer =================
  word_t          pk_word;
  logic [3:0]     pk_lane;
  logic [GAW-1:0] pk_addr;
  logic           pk_flush;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk_word <= '0; pk_lane <= '0; pk_addr <= '0; pk_flush <= 1'b0;
    end else begin
      if (pk_flush) begin
        pk_flush <= 1'b0;
        pk_word  <= '0;
        pk_addr  <= pk_addr + 1'b1;
      end
      if (sm_clear) begin
        pk_lane <= '0; pk_addr <= sm_gm_base; pk_word <= '0;
      end else if (sm_out_valid) begin
        pk_word[pk_lane] <= sm_out_prob;
        pk_lane          <= (sm_out_last || pk_lane == 4'd15) ? '0 : pk_lane + 1'b1;
        pk_flush         <= sm_out_last || pk_lane == 4'd15;
      end
    end
  end

  // ================= global memory ports =================
  logic [GAW-1:0] rq_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rq_addr <= '0;
    else if (!rq_to_gm) rq_addr <= rq_gm_addr;
    else if (rq_out_valid && !gm_we) rq_addr <= rq_addr + 1'b1;
  end

  always_comb begin
    g_we = 1'b0; g_waddr = gm_waddr; g_wdata = gm_wdata;
    if (gm_we) begin
      g_we = 1'b1;
    end else if (rq_to_gm && rq_out_valid) begin
      g_we = 1'b1; g_waddr = rq_addr; g_wdata = rq_out_act;
    end else if (pk_flush) begin
      g_we = 1'b1; g_waddr = pk_addr; g_wdata = pk_word;
    end
    if (sv_active) begin
      g_re = v_re; g_raddr = sv_v_base + GAW'(v_raddr);
    end else begin
      g_re = gm_re; g_raddr = gm_raddr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mpq_in_valid <= 1'b0;
    else        mpq_in_valid <= gm_re && gm_to_mpq && !sv_active;
  end

  // ================= dispatcher: quantizer -> IMEM =================
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_hi_cnt <= '0; disp_lo_cnt <= '0;
    end else if (mpq_start) begin
      disp_hi_cnt <= '0; disp_lo_cnt <= '0;
    end else if (mpq_out_valid) begin
      if (mpq_out_prec == PREC_HI) disp_hi_cnt <= disp_hi_cnt + 1'b1;
      else                         disp_lo_cnt <= disp_lo_cnt + 1'b1;
    end
  end

  // ================= DBSC clusters =================
  logic [NCLUSTER-1:0] c_out_valid;
  logic signed [NCLUSTER-1:0][15:0][AGG_W-1:0] c_out;

  for (genvar c = 0; c < NCLUSTER; c++) begin : g_cl
    logic          i_we;
    logic [KW-1:0] i_sel;
    logic [IA-1:0] i_addr;
    word_t         i_data;
    always_comb begin
      if (mpq_out_valid && disp_cluster == c) begin
        i_we   = 1'b1;
        i_sel  = disp_core;
        i_addr = (mpq_out_prec == PREC_HI) ? disp_hi_cnt[IA-1:0]
                                           : disp_lo_base + disp_lo_cnt[IA-1:0];
        i_data = mpq_out_act;
      end else begin
        i_we   = imem_we && wr_cluster == c;
        i_sel  = wr_core;
        i_addr = imem_waddr;
        i_data = imem_wdata;
      end
    end

    dbsc_cluster #(.NCORE(NCORE), .IMEM_DEPTH(IMEM_DEPTH), .WSETS(9), .OMEM_DEPTH(OMEM_DEPTH)) u_cluster (
      .clk, .rst_n,
      .core_sel  (i_sel),
      .imem_we   (i_we), .imem_waddr(i_addr), .imem_wdata(i_data),
      .wmem_we   (wmem_we && wr_cluster == c),
      .wmem_wset (wmem_wset), .wmem_wrow, .wmem_wdata,
      .start     (dbsc_start[c]),
      .mode(dbsc_mode), .prec(dbsc_prec), .acc(dbsc_acc),
      .wset      (dbsc_wset),
      .in_base   (dbsc_in_base), .out_base(dbsc_out_base), .n_steps(dbsc_n_steps),
      .busy      (dbsc_busy[c]), .done(dbsc_done[c]),
      .agg_re    (agg_re && agg_cluster == c),
      .agg_raddr,
      .out_valid (c_out_valid[c]),
      .out_data  (c_out[c])
    );
  end

  logic [CW-1:0] agg_cl_q1, agg_cl_q2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin agg_cl_q1 <= '0; agg_cl_q2 <= '0; end
    else begin agg_cl_q1 <= agg_cluster; agg_cl_q2 <= agg_cl_q1; end
  end
  assign agg_valid   = c_out_valid[agg_cl_q2];
  assign agg_data    = c_out[agg_cl_q2];
  assign rq_in_valid = agg_valid;
  assign rq_in_psum  = agg_data;

  // ================= PSXU =================
  psxu #(.LANES(64), .DW(12)) u_psxu (
    .clk, .rst_n,
    .in_valid(sas_valid), .in_ready(sas_ready), .sas_in(sas_data),
    .mode(sas_mode), .row_start(sas_row_start), .band_start(sas_band_start),
    .word_idx(sas_word_idx),
    .aug_valid, .aug_bitmap,
    .rp_valid, .rp_count, .rp_patch, .rp_ptr, .rp_nnz,
    .col_valid, .col_ready, .col_out
  );

  assert property (@(posedge clk) disable iff (!rst_n) score_valid |-> sm_ready)
    else $error("sd_processor: softmax overrun, pace the QK stream with sm_ready");
endmodule
