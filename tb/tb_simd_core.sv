// tb_simd_core: checks the three SIMD units.
// Softmax: rows of 2..40 random Q8.8 scores; each probability must lie
// within 10 % + 8 lsb of the exact softmax (the exponential is an
// approximation), the row must sum to about 4096, out_last must close the
// row, and a row of L scores must take 3L + 1 cycles (3L of work and the output
// register) from first input to last
// output. min{CAS} must equal the smallest first probability seen, and
// cas_send must hand the IPSU that minimum followed by every CAS in order.
// Quantizer: a random important-index list is served through the index
// port; important pixels must pass unchanged as INT12, others become
// min(63, (x + 32) >> 6) as INT6; with tips_en low every pixel is INT12.
// Requantizer: round-shift-clamp against a reference.
module tb_simd_core;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sm_clear_min = 0, sm_in_valid = 0, sm_in_ready, sm_in_last = 0;
  logic signed [15:0] sm_in_score = 0;
  logic sm_out_valid, sm_out_cas, sm_out_last;
  logic [11:0] sm_out_prob, sm_min_cas;
  logic cas_send = 0, cas_busy, ipsu_min_valid, ipsu_cas_valid;
  logic [11:0] ipsu_min_cas, ipsu_cas;
  logic mpq_start = 0, mpq_tips_en = 1, mpq_in_valid = 0;
  logic [15:0][11:0] mpq_in_act = '0;
  logic [8:0] mpq_imp_count = 0;
  logic [7:0] mpq_idx_raddr, mpq_idx_rdata;
  logic mpq_out_valid;
  prec_e mpq_out_prec;
  logic [15:0][11:0] mpq_out_act;
  logic [7:0] mpq_out_pix;
  logic [4:0] rq_shift = 0;
  logic rq_in_valid = 0, rq_out_valid;
  logic signed [15:0][25:0] rq_in_psum = '0;
  logic [15:0][11:0] rq_out_act;
  int checks = 0, failures = 0;

  simd_core #(.LANES(16), .LMAX(64), .NPIX(256)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- softmax output monitor ----
  real    ref_p [$];
  int     cas_seen [$];
  int     row_sum = 0, nout = 0, t_last_out = 0;
  always @(posedge clk) if (rst_n && sm_out_valid) begin
    real r, d;
    r = ref_p.pop_front();
    d = real'(sm_out_prob) - r;
    if (d < 0) d = -d;
    checks++;
    if (d > 0.10 * r + 8.0) begin
      failures++;
      if (failures < 8) $display("softmax got %0d exp %0.1f", sm_out_prob, r);
    end
    if (sm_out_cas) cas_seen.push_back(sm_out_prob);
    row_sum += sm_out_prob;
    nout++;
    t_last_out = $time;
  end

  // ---- IPSU side of the CAS hand-over ----
  int got_min = -1;
  int got_cas [$];
  always @(posedge clk) if (rst_n) begin
    if (ipsu_min_valid) got_min = ipsu_min_cas;
    if (ipsu_cas_valid) got_cas.push_back(ipsu_cas);
  end

  // ---- index list served to the quantizer (IPSU model) ----
  logic [7:0] idx_list [256];
  assign mpq_idx_rdata = idx_list[mpq_idx_raddr];

  initial begin
    int nrows, L, t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- softmax ----------------
    @(negedge clk) sm_clear_min = 1;
    @(negedge clk) sm_clear_min = 0;
    nrows = 12;
    for (int row = 0; row < nrows; row++) begin
      int s [64];
      real e [64], sum, mx;
      L = (row == 0) ? 2 : $urandom_range(3, 40);
      mx = -1.0e9; sum = 0;
      for (int j = 0; j < L; j++) begin
        s[j] = $urandom_range(0, 3000) - 1500;   // -5.9 .. +5.9 in Q8.8
        if (real'(s[j]) > mx) mx = real'(s[j]);
      end
      for (int j = 0; j < L; j++) begin e[j] = $exp((real'(s[j]) - mx) / 256.0); sum += e[j]; end
      for (int j = 0; j < L; j++) ref_p.push_back(4096.0 * e[j] / sum);
      row_sum = 0; nout = 0;
      t0 = $time;
      for (int j = 0; j < L; j++) begin
        @(negedge clk);
        while (!sm_in_ready) @(negedge clk);
        sm_in_valid = 1; sm_in_score = 16'(s[j]); sm_in_last = (j == L - 1);
      end
      @(negedge clk) sm_in_valid = 0; sm_in_last = 0;
      while (nout < L) @(negedge clk);
      checks++;
      if (row_sum < 3600 || row_sum > 4600) begin failures++; $display("row sum %0d", row_sum); end
      checks++;
      if ((t_last_out - t0) / 10 != 3 * L + 1) begin
        failures++; $display("row of %0d took %0d cycles, expected %0d", L, (t_last_out - t0) / 10, 3 * L + 1);
      end
    end
    // min{CAS} and replay
    begin
      int m;
      m = 4095;
      foreach (cas_seen[i]) if (cas_seen[i] < m) m = cas_seen[i];
      checks++;
      if (sm_min_cas != m) begin failures++; $display("min cas %0d exp %0d", sm_min_cas, m); end
      @(negedge clk) cas_send = 1;
      @(negedge clk) cas_send = 0;
      while (cas_busy) @(negedge clk);
      repeat (2) @(negedge clk);
      checks++;
      if (got_min != m || got_cas.size() != nrows) begin
        failures++; $display("replay: min %0d (exp %0d), %0d CAS (exp %0d)", got_min, m, got_cas.size(), nrows);
      end
      foreach (got_cas[i]) begin
        checks++;
        if (i < cas_seen.size() && got_cas[i] != cas_seen[i]) begin failures++; $display("replayed CAS %0d differs", i); end
      end
    end
    // ---------------- mixed-precision quantizer ----------------
    for (int pass = 0; pass < 3; pass++) begin
      int n, npix;
      logic imp [256];
      npix = 200; n = 0;
      for (int p = 0; p < npix; p++) begin
        imp[p] = ($urandom_range(0, 1) == 1);
        if (imp[p]) begin idx_list[n] = 8'(p); n++; end
      end
      mpq_imp_count = 9'(n);
      mpq_tips_en = (pass != 2);
      @(negedge clk) mpq_start = 1;
      @(negedge clk) mpq_start = 0;
      for (int p = 0; p < npix; p++) begin
        logic [15:0][11:0] x;
        for (int l = 0; l < 16; l++) x[l] = 12'($urandom);
        if (p == 3) for (int l = 0; l < 16; l++) x[l] = 12'd4095;
        mpq_in_act = x; mpq_in_valid = 1;
        @(negedge clk);
        mpq_in_valid = 0;
        checks++;
        if (!mpq_out_valid || mpq_out_pix != 8'(p)) begin failures++; $display("mpq no output for %0d", p); end
        else if (imp[p] || !mpq_tips_en) begin
          if (mpq_out_prec != PREC_HI || mpq_out_act != x) begin failures++; $display("pixel %0d should be INT12", p); end
        end else begin
          for (int l = 0; l < 16; l++) begin
            int q;
            q = (int'(x[l]) + 32) / 64;
            if (q > 63) q = 63;
            if (mpq_out_prec != PREC_LO || mpq_out_act[l] != 12'(q)) begin
              failures++;
              if (failures < 8) $display("pixel %0d lane %0d got %0d exp %0d", p, l, mpq_out_act[l], q);
            end
          end
        end
        if ($urandom_range(0, 3) == 0) @(negedge clk);   // gaps in the stream
      end
    end
    // ---------------- requantizer ----------------
    for (int t = 0; t < 200; t++) begin
      int sh;
      sh = $urandom_range(0, 20);
      rq_shift = 5'(sh);
      for (int l = 0; l < 16; l++) rq_in_psum[l] = 26'($signed(32'($urandom)) >>> $urandom_range(0, 6));
      rq_in_valid = 1;
      @(negedge clk);
      rq_in_valid = 0;
      for (int l = 0; l < 16; l++) begin
        longint v, q;
        v = longint'($signed(rq_in_psum[l]));
        q = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
        if (q < 0) q = 0;
        if (q > 4095) q = 4095;
        checks++;
        if (!rq_out_valid || longint'(rq_out_act[l]) != q) begin
          failures++;
          if (failures < 8) $display("requant got %0d exp %0d", rq_out_act[l], q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
