// tb_sd_processor_full: the processor top at the paper's size, no parameter
// changed: 4 clusters of 4 dual-mode bit-slice cores (4096 PEs), 256-word
// IMEM/OMEM per core, 192 KB global memory, 4096-pixel CAS buffer and
// index register, rows of up to 128 tokens. It checks that the full-size
// build works along the main paths:
//   1. four pixel rows of 77 CLIP-token scores through the QK engine and
//      the softmax; each row's probabilities (5 packed words) must sum to
//      1.0 (4096) within rounding.
//   2. the four CAS values replayed into the IPSU; the important count must
//      match CAS < min{CAS} + margin.
//   3. a weight-stationary INT12 pass on the last core of the last cluster
//      (the other three cores of that cluster hold zero weights in the set
//      used), read through the aggregation core (bit-exact check) and
//      requantized into the upper bank of the global memory (checked).
// A watchdog ends the run with a failure after 1 ms of simulated time.
`timescale 1ns/1ps
module tb_sd_processor_full;
  import sd_pkg::*;
  localparam int GAW = 13, IDXW = 12, IA = 8, OA = 8, AGG_W = 26;
  localparam int L = 77, NR = 4;
  localparam int PB = 100, RB = 8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gm_we, gm_re, gm_to_mpq;
  logic [GAW-1:0] gm_waddr, gm_raddr;
  logic [15:0][11:0] gm_wdata, gm_rdata;
  logic qk_valid, qk_last, qk_row_last;
  logic signed [15:0][11:0] qk_q, qk_k;
  logic [4:0] qk_shift;
  logic sm_ready, sm_clear;
  logic [GAW-1:0] sm_gm_base;
  logic cas_send, cas_busy, ipsu_start;
  logic [11:0] ipsu_margin;
  logic [IDXW:0] imp_count, pix_count;
  logic mpq_start, tips_en;
  logic [1:0] disp_cluster, disp_core, wr_cluster, wr_core, agg_cluster;
  logic [IA-1:0] disp_lo_base;
  logic [IA:0] disp_hi_cnt, disp_lo_cnt;
  logic imem_we; logic [IA-1:0] imem_waddr; logic [15:0][11:0] imem_wdata;
  logic wmem_we; logic [3:0] wmem_wset, wmem_wrow; logic signed [15:0][7:0] wmem_wdata;
  logic [3:0] dbsc_start, dbsc_busy, dbsc_done;
  stat_mode_e dbsc_mode; prec_e dbsc_prec; logic dbsc_acc; logic [3:0] dbsc_wset;
  logic [IA-1:0] dbsc_in_base; logic [OA-1:0] dbsc_out_base; logic [OA:0] dbsc_n_steps;
  logic agg_re, agg_valid; logic [OA-1:0] agg_raddr;
  logic signed [15:0][AGG_W-1:0] agg_data;
  logic [4:0] rq_shift; logic rq_to_gm; logic [GAW-1:0] rq_gm_addr;
  logic sas_valid, sas_ready; logic [63:0][11:0] sas_data; patch_mode_e sas_mode;
  logic sas_row_start, sas_band_start; logic [5:0] sas_word_idx;
  logic aug_valid; logic [63:0] aug_bitmap;
  logic rp_valid; logic [2:0] rp_count; logic [3:0][5:0] rp_patch; logic [3:0][12:0] rp_ptr;
  logic [3:0][6:0] rp_nnz; logic col_valid, col_ready; csr_col_t col_out;
  logic sv_active; logic [GAW-1:0] sv_v_base; patch_mode_e sv_mode;
  logic sv_row_start, sv_row_last; logic [5:0] sv_word_idx;
  logic cb_valid, cb_ready, cb_has, cb_last; csr_col_t cb_col;
  logic val_valid = 0, val_ready; logic [11:0] val_data = 0;
  logic sv_out_valid; logic signed [15:0][31:0] sv_out;


  sd_processor dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1ms;
    $display("watchdog: run did not finish");
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic gm_read(input int a, output logic [15:0][11:0] d);
    @(negedge clk); gm_re = 1; gm_raddr = GAW'(a); gm_to_mpq = 0;
    @(negedge clk); gm_re = 0; d = gm_rdata;
  endtask
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  logic [11:0] act [16][16];
  logic signed [7:0] wgt [16][16];
  int cas [NR];

  initial begin
    logic [15:0][11:0] d;
    int mincas, nimp;
    longint ps [16][16];
    {gm_we, gm_re, gm_to_mpq, qk_valid, qk_last, qk_row_last, sm_clear, cas_send, ipsu_start,
     mpq_start, tips_en, imem_we, wmem_we, dbsc_acc, agg_re, rq_to_gm, sas_valid, sas_row_start,
     sas_band_start, sv_active, sv_row_start, sv_row_last, cb_valid, cb_has, cb_last} = '0;
    gm_waddr = '0; gm_raddr = '0; gm_wdata = '0; qk_q = '0; qk_k = '0; qk_shift = 5'd4;
    sm_gm_base = GAW'(PB); ipsu_margin = '0; disp_cluster = 0; disp_core = 0; disp_lo_base = 128;
    wr_cluster = 0; wr_core = 0; imem_waddr = '0; imem_wdata = '0; wmem_wset = 0; wmem_wrow = 0;
    wmem_wdata = '0; dbsc_start = '0; dbsc_mode = MODE_WS; dbsc_prec = PREC_HI; dbsc_wset = 0;
    dbsc_in_base = 0; dbsc_out_base = 0; dbsc_n_steps = 0; agg_cluster = 0; agg_raddr = 0;
    rq_shift = 12; rq_gm_addr = GAW'(RB); sas_data = '0; sas_mode = PATCH_64; sas_word_idx = 0;
    col_ready = 1; sv_v_base = '0; sv_mode = PATCH_64; sv_word_idx = 0; cb_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- 1. 77-token rows through QK and softmax ----------
    @(negedge clk) sm_clear = 1;
    @(negedge clk) sm_clear = 0;
    for (int p = 0; p < NR; p++) begin
      while (!sm_ready) @(negedge clk);
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        qk_valid = 1; qk_last = 1; qk_row_last = (t == L - 1);
        for (int l = 0; l < 16; l++) begin
          qk_q[l] = 12'($urandom_range(0, 255)) - 12'sd128;
          qk_k[l] = 12'($urandom_range(0, 255)) - 12'sd128;
        end
      end
      @(negedge clk) qk_valid = 0;
      repeat (3 * L + 4) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    for (int p = 0; p < NR; p++) begin
      int s;
      s = 0;
      for (int w = 0; w < 5; w++) begin
        gm_read(PB + 5 * p + w, d);
        if (w == 0) cas[p] = d[0];
        for (int l = 0; l < 16; l++) if (16 * w + l < L) s += d[l];
      end
      check(s > 4096 - 80 && s < 4096 + 80, $sformatf("row %0d probabilities sum to %0d", p, s));
    end

    // ---------- 2. CAS replay into the IPSU ----------
    mincas = 4096;
    foreach (cas[p]) if (cas[p] < mincas) mincas = cas[p];
    nimp = 0;
    foreach (cas[p]) nimp += (cas[p] < mincas + 2) ? 1 : 0;
    @(negedge clk) ipsu_start = 1; ipsu_margin = 12'd2;
    @(negedge clk) ipsu_start = 0; cas_send = 1;
    @(negedge clk) cas_send = 0;
    while (cas_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    check(int'(imp_count) == nimp, $sformatf("important %0d exp %0d", imp_count, nimp));
    check(int'(pix_count) == NR, $sformatf("pixels replayed %0d", pix_count));

    // ---------- 3. INT12 pass on cluster 3 / core 3 ----------
    for (int k = 0; k < 4; k++)
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); wmem_we = 1; wr_cluster = 2'd3; wr_core = 2'(k); wmem_wset = 4'd8; wmem_wrow = 4'(r);
        for (int c = 0; c < 16; c++) begin
          if (k == 3) wgt[c][r] = 8'($urandom);
          wmem_wdata[c] = (k == 3) ? wgt[c][r] : 8'sd0;
        end
      end
    @(negedge clk) wmem_we = 0;
    for (int a = 0; a < 16; a++) begin
      @(negedge clk); imem_we = 1; wr_cluster = 2'd3; wr_core = 2'd3; imem_waddr = 8'(100 + a);
      for (int l = 0; l < 16; l++) begin act[a][l] = 12'($urandom); imem_wdata[l] = act[a][l]; end
    end
    @(negedge clk) imem_we = 0;
    for (int a = 0; a < 16; a++)
      for (int c = 0; c < 16; c++) begin
        ps[a][c] = 0;
        for (int r = 0; r < 16; r++) ps[a][c] += longint'(act[a][r]) * longint'(wgt[c][r]);
      end
    @(negedge clk);
    dbsc_start = 4'b1000; dbsc_mode = MODE_WS; dbsc_prec = PREC_HI; dbsc_acc = 0; dbsc_wset = 4'd8;
    dbsc_in_base = 8'd100; dbsc_out_base = 8'd200; dbsc_n_steps = 9'd16;
    @(negedge clk) dbsc_start = '0;
    while (!dbsc_done[3]) @(negedge clk);
    fork
      begin
        @(negedge clk) rq_to_gm = 1;
        for (int a = 0; a < 16; a++) begin
          @(negedge clk); agg_re = 1; agg_cluster = 2'd3; agg_raddr = 8'(200 + a);
        end
        @(negedge clk) agg_re = 0;
        repeat (6) @(negedge clk);
        rq_to_gm = 0;
      end
      begin
        int j;
        j = 0;
        while (j < 16) begin
          @(posedge clk);
          if (agg_valid) begin
            for (int c = 0; c < 16; c++)
              check(longint'($signed(agg_data[c])) == ps[j][c],
                    $sformatf("psum %0d col %0d got %0d exp %0d", j, c, $signed(agg_data[c]), ps[j][c]));
            j++;
          end
        end
      end
    join
    for (int a = 0; a < 16; a++) begin
      gm_read(RB + a, d);
      for (int c = 0; c < 16; c++) begin
        longint r;
        r = (ps[a][c] + 2048) >>> 12;
        if (r < 0) r = 0;
        if (r > 4095) r = 4095;
        check(longint'(d[c]) == r, $sformatf("requant %0d col %0d got %0d exp %0d", a, c, d[c], r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
