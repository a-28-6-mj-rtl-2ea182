// tb_attention_core: checks both engines of the attention core.
// QK: random 12-bit query/key chunks over a head dimension of 4 chunks;
// the score must be the shifted, saturated dot product.
// SV: for each patch size, SAS rows of 4 words are pruned and compressed
// the way the PSXU does it (XOR with the bit one patch to the left, column
// indices per patch); the core gets the indices, the nonzero values in
// order, and reads value rows from a memory model with one cycle latency.
// The output row must equal sum_j S_j * V_j over the nonzero scores, the
// count of skipped zeros must match, and the whole row must take no more
// than (nonzeros + 3 per word + 8) cycles, showing zeros are skipped.
module tb_attention_core;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic qk_valid = 0, qk_last = 0, score_valid;
  logic signed [15:0][11:0] qk_q = '0, qk_k = '0;
  logic [4:0] qk_shift = 0;
  logic signed [15:0] score;
  patch_mode_e sv_mode = PATCH_64;
  logic sv_row_start = 0, sv_row_last = 0;
  logic [5:0] sv_word_idx = 0;
  logic cb_valid = 0, cb_ready, cb_has = 0, cb_last = 0;
  csr_col_t cb_col = '0;
  logic val_valid = 0, val_ready;
  logic [11:0] val_data = 0;
  logic v_re;
  logic [11:0] v_raddr;
  logic signed [15:0][11:0] v_rdata;
  logic sv_out_valid;
  logic signed [15:0][31:0] sv_out;
  logic [31:0] skipped;
  int checks = 0, failures = 0;

  attention_core dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // value matrix model, synchronous read
  logic signed [15:0][11:0] vmem [256];
  always @(posedge clk) if (v_re) v_rdata <= vmem[v_raddr];

  // nonzero score values, offered in order
  int vals [$];
  always @(negedge clk) begin
    val_valid = (vals.size() != 0);
    val_data  = (vals.size() != 0) ? 12'(vals[0]) : 12'd0;
  end
  always @(posedge clk) if (val_valid && val_ready) void'(vals.pop_front());

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- QK ----------------
    for (int t = 0; t < 50; t++) begin
      longint acc;
      int sh;
      acc = 0; sh = $urandom_range(0, 12);
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        for (int l = 0; l < 16; l++) begin
          qk_q[l] = 12'($urandom); qk_k[l] = 12'($urandom);
          if (t == 0) begin qk_q[l] = -12'sd2048; qk_k[l] = -12'sd2048; end
          acc += longint'($signed(qk_q[l])) * longint'($signed(qk_k[l]));
        end
        qk_valid = 1; qk_last = (c == 3); qk_shift = 5'(sh);
      end
      @(negedge clk) qk_valid = 0; qk_last = 0;
      begin
        longint e;
        e = acc >>> sh;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (!score_valid || longint'(score) != e) begin
          failures++; if (failures < 6) $display("qk got %0d exp %0d", score, e);
        end
      end
    end
    // ---------------- SV ----------------
    for (int a = 0; a < 256; a++) for (int l = 0; l < 16; l++) vmem[a][l] = 12'($urandom);
    for (int r = 0; r < 9; r++) begin
      int W, nnz, t0;
      logic bits [256];
      logic x;
      longint e [16];
      W = (r % 3 == 0) ? 64 : (r % 3 == 1) ? 32 : 16;
      sv_mode = (W == 64) ? PATCH_64 : (W == 32) ? PATCH_32 : PATCH_16;
      nnz = 0;
      for (int l = 0; l < 16; l++) e[l] = 0;
      for (int c = 0; c < 256; c++) begin
        bits[c] = (c >= W && $urandom_range(0, 5) != 0) ? bits[c - W] : ($urandom_range(0, 3) == 0);
        if (bits[c]) begin
          int s;
          s = $urandom_range(1, 4095);
          vals.push_back(s);
          nnz++;
          for (int l = 0; l < 16; l++) e[l] += longint'(s) * longint'($signed(vmem[c][l]));
        end
      end
      t0 = $time;
      for (int w = 0; w < 4; w++) begin
        int beats [$];
        beats.delete();
        for (int b = 0; b < 64; b++) begin
          int c;
          c = 64 * w + b;
          x = (c >= W) ? (bits[c] ^ bits[c - W]) : bits[c];
          if (x) beats.push_back(((b / W) << 6) | (b % W));
        end
        if (beats.size() == 0) beats.push_back(-1);
        foreach (beats[i]) begin
          @(negedge clk);
          cb_valid = 1; cb_has = (beats[i] >= 0); cb_col = (beats[i] >= 0) ? 8'(beats[i]) : '0;
          cb_last = (i == beats.size() - 1);
          sv_row_start = (w == 0); sv_row_last = (w == 3); sv_word_idx = 6'(w);
          while (!cb_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk) cb_valid = 0;
      end
      while (!sv_out_valid) @(posedge clk);
      checks++;
      if (($time - t0) / 10 > nnz + 3 * 4 + 8 + 64) begin
        failures++; $display("row %0d took %0d cycles for %0d nonzeros", r, ($time - t0) / 10, nnz);
      end
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (longint'($signed(sv_out[l])) != e[l]) begin
          failures++; if (failures < 8) $display("row %0d lane %0d got %0d exp %0d", r, l, $signed(sv_out[l]), e[l]);
        end
      end
      checks++;
      if (vals.size() != 0) begin failures++; $display("row %0d left %0d values", r, vals.size()); end
    end
    checks++;
    if (skipped == 0) begin failures++; $display("no zero was skipped"); end
    $display("zeros skipped: %0d", skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
