// tb_sd_processor: end-to-end test of the processor top at reduced size
// (2 clusters of 2 cores, 32-word IMEM/OMEM, 16 pixels, rows of up to 8
// tokens). It runs one denoising step's data flow through the real units
// and checks each result against a model computed here:
//   1. cross-attention: 16 pixel rows of 4 token scores go through the QK
//      engine into the softmax; the packed probabilities land in the global
//      memory. Check: each row sums to 1.0 (4096) within rounding.
//   2. TIPS: the CAS buffer is replayed into the IPSU with a margin picked
//      here. Check: the important count equals the model's count of
//      CAS < min{CAS} + margin.
//   3. mixed precision: 16 activation words are read from the global memory
//      into the quantizer, which dispatches INT12 (important) and INT6
//      pixels into cluster 1 / core 1. Check: HI and LO counts.
//   4. DBSC: one weight-stationary pass per precision on cluster 1 (core 0
//      holds zero weights so its sum adds nothing), read out through the
//      aggregation core. Check: every partial sum, bit-exact.
//   5. requantization of the aggregated sums into the global memory.
//      Check: every written activation.
//   6. TIPS off: all pixels must go out as INT12.
//   7. PSXU: one 4-word score row is compressed. Check: beats = model's
//      XOR-augmented nonzero count, which is below the raw nonzero count.
//   8. attention SV engine: a compressed row is decoded, value rows are read
//      from the global memory, zeros are skipped. Check: bit-exact sums and
//      fewer value fetches than columns.
// Mechanism counters (each must be non-zero): softmax rows, CAS replays,
// important pixels, LO pixels, HI pixels, DBSC passes per precision,
// requantized words, PSXU stall cycles, PSXU compression, SV skips.
// A watchdog ends the run with a failure after 2 ms.
`timescale 1ns/1ps
module tb_sd_processor;
  import sd_pkg::*;
  localparam int NCL = 2, NCO = 2, IMD = 32, OMD = 32, NP = 16, LM = 8;
  localparam int GAW = 13, IDXW = 4, IA = 5, OA = 5, AGG_W = 25;
  localparam int L = 4;          // tokens per row
  localparam int PB = 100, AB = 200, RB = 300, VB = 1000;

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
  logic [0:0] disp_cluster, disp_core, wr_cluster, wr_core, agg_cluster;
  logic [IA-1:0] disp_lo_base;
  logic [IA:0] disp_hi_cnt, disp_lo_cnt;
  logic imem_we; logic [IA-1:0] imem_waddr; logic [15:0][11:0] imem_wdata;
  logic wmem_we; logic [3:0] wmem_wset, wmem_wrow; logic signed [15:0][7:0] wmem_wdata;
  logic [NCL-1:0] dbsc_start, dbsc_busy, dbsc_done;
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

  sd_processor #(.NCLUSTER(NCL), .NCORE(NCO), .IMEM_DEPTH(IMD), .OMEM_DEPTH(OMD),
                 .GMEM_KB(192), .NPIX(NP), .LMAX(LM)) dut (.*);

  int checks = 0, failures = 0;
  int n_rows = 0, n_replay = 0, n_stall = 0, n_beats = 0, n_vfetch = 0, n_rq = 0;
  int n_hi_pass = 0, n_lo_pass = 0;

  initial begin
    #2ms;
    $display("watchdog: run did not finish");
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.u_simd.ipsu_cas_valid) n_replay++;
    if (sas_valid && !sas_ready) n_stall++;
    if (col_valid && col_ready) n_beats++;
  end
  int vals [$];
  always @(negedge clk) begin
    val_valid = (vals.size() != 0);
    val_data  = (vals.size() != 0) ? 12'(vals[0]) : 12'd0;
  end
  always @(posedge clk) begin
    if (val_valid && val_ready) begin void'(vals.pop_front()); n_vfetch++; end
  end

  task automatic gm_write(input int a, input logic [15:0][11:0] d);
    @(negedge clk); gm_we = 1; gm_waddr = GAW'(a); gm_wdata = d;
    @(negedge clk); gm_we = 0;
  endtask
  task automatic gm_read(input int a, output logic [15:0][11:0] d);
    @(negedge clk); gm_re = 1; gm_raddr = GAW'(a); gm_to_mpq = 0;
    @(negedge clk); gm_re = 0; d = gm_rdata;
  endtask
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  logic [11:0] act [NP][16];
  logic signed [7:0] wgt [16][16];        // [col][row], core 1 of cluster 1
  int cas [NP];
  bit imp [NP];

  initial begin
    logic [15:0][11:0] d;
    int mincas, margin, nimp, hi, lo;
    {gm_we, gm_re, gm_to_mpq, qk_valid, qk_last, qk_row_last, sm_clear, cas_send, ipsu_start,
     mpq_start, tips_en, imem_we, wmem_we, dbsc_acc, agg_re, rq_to_gm, sas_valid, sas_row_start,
     sas_band_start, sv_active, sv_row_start, sv_row_last, cb_valid, cb_has, cb_last} = '0;
    gm_waddr = '0; gm_raddr = '0; gm_wdata = '0; qk_q = '0; qk_k = '0; qk_shift = '0;
    sm_gm_base = GAW'(PB); ipsu_margin = '0; disp_cluster = 1; disp_core = 1; disp_lo_base = 16;
    wr_cluster = 0; wr_core = 0; imem_waddr = '0; imem_wdata = '0; wmem_wset = 0; wmem_wrow = 0;
    wmem_wdata = '0; dbsc_start = '0; dbsc_mode = MODE_WS; dbsc_prec = PREC_HI; dbsc_wset = 0;
    dbsc_in_base = 0; dbsc_out_base = 0; dbsc_n_steps = 0; agg_cluster = 1; agg_raddr = 0;
    rq_shift = 10; rq_gm_addr = GAW'(RB); sas_data = '0; sas_mode = PATCH_64; sas_word_idx = 0;
    col_ready = 1; sv_v_base = GAW'(VB); sv_mode = PATCH_64; sv_word_idx = 0; cb_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- 1. cross-attention: QK -> softmax -> packed probabilities ----------
    $display("%0t phase 1", $time);
    @(negedge clk) sm_clear = 1;
    @(negedge clk) sm_clear = 0;
    for (int p = 0; p < NP; p++) begin
      while (!sm_ready) @(negedge clk);
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        qk_valid = 1; qk_last = 1; qk_row_last = (t == L - 1);
        qk_q = '0; qk_k = '0;
        qk_q[0] = 12'(p * 9 - 70 + $urandom_range(0, 3));
        qk_k[0] = (t == 0) ? 12'sd8 : 12'(t - 2);
      end
      @(negedge clk) qk_valid = 0;
      repeat (3 * L + 4) @(negedge clk);
      n_rows++;
    end
    repeat (4) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      int s;
      gm_read(PB + p, d);
      s = 0;
      for (int t = 0; t < L; t++) s += d[t];
      check(s > 4096 - 16 && s < 4096 + 16, $sformatf("row %0d probabilities sum to %0d", p, s));
      cas[p] = d[0];
    end

    // ---------- 2. TIPS: CAS replay into the IPSU ----------
    $display("%0t phase 2", $time);
    mincas = 4096;
    foreach (cas[p]) if (cas[p] < mincas) mincas = cas[p];
    begin
      int srt [NP];
      srt = cas; srt.sort();
      margin = srt[5] - mincas;
    end
    nimp = 0;
    foreach (cas[p]) begin imp[p] = cas[p] < mincas + margin; nimp += imp[p]; end
    @(negedge clk) ipsu_start = 1; ipsu_margin = 12'(margin);
    @(negedge clk) ipsu_start = 0; cas_send = 1;
    @(negedge clk) cas_send = 0;
    while (cas_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    check(imp_count == (IDXW+1)'(nimp), $sformatf("important %0d exp %0d", imp_count, nimp));
    check(pix_count == NP, $sformatf("pixels replayed %0d", pix_count));
    check(nimp > 0 && nimp < NP, "margin gives a mix of important and other pixels");

    // ---------- 3. quantizer + dispatcher ----------
    $display("%0t phase 3", $time);
    for (int p = 0; p < NP; p++) begin
      for (int l = 0; l < 16; l++) begin act[p][l] = 12'($urandom); d[l] = act[p][l]; end
      gm_write(AB + p, d);
    end
    for (int c = 0; c < 2; c++)
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); wmem_we = 1; wr_cluster = 1; wr_core = 1'(c); wmem_wset = 0; wmem_wrow = 4'(r);
        for (int k = 0; k < 16; k++) begin
          wgt[k][r] = (r == 0 && k == 0) ? -8'sd128 : 8'($urandom);
          wmem_wdata[k] = (c == 1) ? wgt[k][r] : 8'sd0;
        end
      end
    @(negedge clk) wmem_we = 0;
    @(negedge clk) mpq_start = 1; tips_en = 1;
    @(negedge clk) mpq_start = 0;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk); gm_re = 1; gm_to_mpq = 1; gm_raddr = GAW'(AB + p);
    end
    @(negedge clk) gm_re = 0; gm_to_mpq = 0;
    repeat (4) @(negedge clk);
    hi = disp_hi_cnt; lo = disp_lo_cnt;
    check(hi == nimp && lo == NP - nimp, $sformatf("dispatched hi %0d lo %0d", hi, lo));

    // ---------- 4. DBSC passes, one per precision ----------
    $display("%0t phase 4", $time);
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk);
      dbsc_start = 2'b10; dbsc_mode = MODE_WS; dbsc_acc = 0; dbsc_wset = 0;
      dbsc_prec    = pass == 0 ? PREC_HI : PREC_LO;
      dbsc_in_base = pass == 0 ? 5'd0 : 5'd16;
      dbsc_out_base = pass == 0 ? 5'd0 : 5'd16;
      dbsc_n_steps = 6'(pass == 0 ? hi : lo);
      @(negedge clk) dbsc_start = '0;
      while (!dbsc_done[1]) @(negedge clk);
      if (pass == 0) n_hi_pass++; else n_lo_pass++;
    end

    // ---------- 5. aggregation read-out, requantization into the global memory ----------
    $display("%0t phase 5", $time);
    begin
      longint ps [NP][16];
      int order [NP];
      int k;
      k = 0;
      for (int p = 0; p < NP; p++) if (imp[p]) order[k++] = p;
      for (int p = 0; p < NP; p++) if (!imp[p]) order[k++] = p;
      for (int j = 0; j < NP; j++) begin
        int p; p = order[j];
        for (int c = 0; c < 16; c++) begin
          ps[j][c] = 0;
          for (int r = 0; r < 16; r++) begin
            int x;
            x = imp[p] ? int'(act[p][r]) : (((act[p][r] + 32) >> 6) > 63 ? 63 : (act[p][r] + 32) >> 6);
            ps[j][c] += longint'(x) * longint'(wgt[c][r]);
          end
        end
      end
      fork
        begin
          @(negedge clk) rq_to_gm = 1;
          for (int j = 0; j < NP; j++) begin
            @(negedge clk); agg_re = 1; agg_cluster = 1;
            agg_raddr = (j < hi) ? OA'(j) : OA'(16 + j - hi);
          end
          @(negedge clk) agg_re = 0;
          repeat (6) @(negedge clk);
          rq_to_gm = 0;
        end
        begin
          int j;
          j = 0;
          while (j < NP) begin
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
      for (int j = 0; j < NP; j++) begin
        gm_read(RB + j, d);
        n_rq++;
        for (int c = 0; c < 16; c++) begin
          longint r;
          r = (ps[j][c] + 512) >>> 10;
          if (r < 0) r = 0;
          if (r > 4095) r = 4095;
          check(longint'(d[c]) == r, $sformatf("requant %0d col %0d got %0d exp %0d", j, c, d[c], r));
        end
      end
    end

    // ---------- 6. TIPS off: every pixel INT12 ----------
    $display("%0t phase 6", $time);
    @(negedge clk) mpq_start = 1; tips_en = 0; disp_cluster = 0; disp_core = 0;
    @(negedge clk) mpq_start = 0;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk); gm_re = 1; gm_to_mpq = 1; gm_raddr = GAW'(AB + p);
    end
    @(negedge clk) gm_re = 0; gm_to_mpq = 0;
    repeat (4) @(negedge clk);
    check(disp_hi_cnt == NP && disp_lo_cnt == 0, $sformatf("TIPS off: hi %0d lo %0d", disp_hi_cnt, disp_lo_cnt));

    // ---------- 7. PSXU: one row of 4 score words ----------
    $display("%0t phase 7", $time);
    begin
      logic [63:0] bm [4];
      int raw, aug;
      raw = 0; aug = 0;
      for (int w = 0; w < 4; w++) begin
        for (int b = 0; b < 64; b++)
          bm[w][b] = (w > 0 && $urandom_range(0, 5) != 0) ? bm[w-1][b] : ($urandom_range(0, 2) == 0);
        raw += $countones(bm[w]);
        aug += $countones(w == 0 ? bm[w] : bm[w] ^ bm[w-1]);
      end
      n_beats = 0;
      for (int w = 0; w < 4; w++) begin
        @(negedge clk);
        for (int b = 0; b < 64; b++) sas_data[b] = bm[w][b] ? 12'($urandom_range(1, 4095)) : 12'd0;
        sas_valid = 1; sas_mode = PATCH_64; sas_row_start = (w == 0); sas_band_start = 1;
        sas_word_idx = 6'(w);
        do @(posedge clk); while (!sas_ready);
      end
      @(negedge clk) sas_valid = 0;
      repeat (200) @(negedge clk);
      check(n_beats == aug, $sformatf("PSXU beats %0d exp %0d", n_beats, aug));
      check(aug < raw, $sformatf("PSXU did not compress: %0d of %0d", aug, raw));
    end

    // ---------- 8. attention SV engine on a compressed row ----------
    $display("%0t phase 8", $time);
    for (int c = 0; c < 256; c++) begin
      for (int l = 0; l < 16; l++) d[l] = 12'($urandom);
      gm_write(VB + c, d);
    end
    begin
      logic bits [256];
      longint e [16];
      int nnz;
      nnz = 0;
      for (int l = 0; l < 16; l++) e[l] = 0;
      for (int c = 0; c < 256; c++) begin
        bits[c] = (c >= 64 && $urandom_range(0, 5) != 0) ? bits[c - 64] : ($urandom_range(0, 3) == 0);
        if (bits[c]) begin
          int s;
          s = $urandom_range(1, 4095);
          vals.push_back(s);
          nnz++;
          // value row c as written above is read back for the model
          gm_read(VB + c, d);
          for (int l = 0; l < 16; l++) e[l] += longint'(s) * longint'($signed(d[l]));
        end
      end
      n_vfetch = 0;
      @(negedge clk) sv_active = 1;
      for (int w = 0; w < 4; w++) begin
        int beats [$];
        beats.delete();
        for (int b = 0; b < 64; b++) begin
          int c;
          c = 64 * w + b;
          if ((c >= 64) ? (bits[c] ^ bits[c - 64]) : bits[c]) beats.push_back(b);
        end
        if (beats.size() == 0) beats.push_back(-1);
        foreach (beats[i]) begin
          @(negedge clk);
          cb_valid = 1; cb_has = (beats[i] >= 0); cb_col = (beats[i] >= 0) ? 8'(beats[i]) : '0;
          cb_last = (i == beats.size() - 1);
          sv_row_start = (w == 0); sv_row_last = (w == 3); sv_word_idx = 6'(w); sv_mode = PATCH_64;
          while (!cb_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk) cb_valid = 0;
      end
      while (!sv_out_valid) @(posedge clk);
      for (int l = 0; l < 16; l++)
        check(longint'($signed(sv_out[l])) == e[l], $sformatf("SV lane %0d got %0d exp %0d", l, $signed(sv_out[l]), e[l]));
      check(vals.size() == 0, "SV engine left values unread");
      check(n_vfetch == nnz && nnz < 256, $sformatf("SV fetched %0d values for %0d nonzeros", n_vfetch, nnz));
      @(negedge clk) sv_active = 0;
    end

    // ---------- mechanism counters ----------
    $display("softmax rows %0d, CAS replays %0d, important %0d, HI %0d, LO %0d, HI passes %0d, LO passes %0d",
             n_rows, n_replay, nimp, hi, lo, n_hi_pass, n_lo_pass);
    $display("requantized words %0d, PSXU stall cycles %0d, SV value fetches %0d of 256",
             n_rq, n_stall, n_vfetch);
    check(n_rows > 0, "no softmax row");
    check(n_replay == NP, "CAS replay count");
    check(nimp > 0, "no important pixel");
    check(lo > 0, "no INT6 pixel");
    check(hi > 0, "no INT12 pixel");
    check(n_hi_pass > 0 && n_lo_pass > 0, "a precision pass is missing");
    check(n_rq > 0, "no requantized word");
    check(n_stall > 0, "PSXU never stalled its input");
    check(n_vfetch < 256, "SV engine skipped nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
