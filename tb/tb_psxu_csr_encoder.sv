// tb_psxu_csr_encoder: checks the patch-wise CSR encoder. Random sparse
// words of several SAS rows and patch bands go in; the reference keeps its
// own per-patch nonzero counts and expects, for each word, the row pointer
// and nonzero count of every patch row and then the column indices of all
// set bits, lowest first. Also checks the max(k,1) cycles per word and
// random back-pressure on the column stream.
module tb_psxu_csr_encoder;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, band_start = 0, col_ready = 1;
  patch_mode_e mode = PATCH_64;
  logic [5:0]  word_idx = 0;
  logic [63:0] bm_in = 0;
  logic rp_valid, col_valid;
  logic [2:0] rp_count;
  logic [3:0][5:0] rp_patch;
  logic [3:0][12:0] rp_ptr;
  logic [3:0][6:0] rp_nnz;
  csr_col_t col_out;
  int checks = 0, failures = 0;

  psxu_csr_encoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected streams
  int ref_acc [64];
  int exp_cols [$];
  int exp_rp [$];     // triples: patch, ptr, nnz
  int nwords = 0, cycles = 0, min_cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (rp_valid) begin
      for (int s = 0; s < rp_count; s++) begin
        int p, q, n;
        p = exp_rp.pop_front(); q = exp_rp.pop_front(); n = exp_rp.pop_front();
        checks++;
        if (rp_patch[s] != p || rp_ptr[s] != q || rp_nnz[s] != n) begin
          failures++;
          if (failures < 6) $display("rp mismatch s=%0d got %0d/%0d/%0d exp %0d/%0d/%0d",
                                     s, rp_patch[s], rp_ptr[s], rp_nnz[s], p, q, n);
        end
      end
    end
    if (col_valid && col_ready) begin
      int e;
      e = exp_cols.pop_front();
      checks++;
      if ({col_out.seg, col_out.col} != 8'(e)) begin
        failures++;
        if (failures < 6) $display("col mismatch got %0d/%0d exp %0d/%0d", col_out.seg, col_out.col, e >> 6, e & 63);
      end
    end
  end

  always @(posedge clk) col_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    int W, ppw, wpr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = patch_mode_e'(m);
      W = (m == 0) ? 64 : (m == 1) ? 32 : 16;
      ppw = 64 / W;
      wpr = (W * W) / 64;          // words in a SAS row
      for (int r = 0; r < 2 * W + 3; r++) begin
        for (int w = 0; w < wpr; w++) begin
          logic [63:0] v;
          v = '0;
          for (int b = 0; b < 64; b++) v[b] = ($urandom_range(0, 15) == 0);
          if ($urandom_range(0, 7) == 0) v = '0;
          // reference
          for (int s = 0; s < ppw; s++) begin
            int p, n;
            p = w * ppw + s; n = 0;
            for (int b = s * W; b < (s + 1) * W; b++) n += v[b];
            if (r % W == 0) ref_acc[p] = 0;
            exp_rp.push_back(p); exp_rp.push_back(ref_acc[p]); exp_rp.push_back(n);
            ref_acc[p] += n;
            for (int b = s * W; b < (s + 1) * W; b++) if (v[b]) exp_cols.push_back(s * 64 + (b - s * W));
          end
          min_cycles += ($countones(v) > 0) ? $countones(v) : 1;
          @(negedge clk);
          bm_in = v; word_idx = 6'(w); band_start = (r % W == 0); in_valid = 1;
          do @(posedge clk); while (!in_ready);
          nwords++;
          @(negedge clk) in_valid = 0;
        end
        if (r > 6 && m == 0) break;   // keep the 64x64 case short
      end
    end
    while (exp_cols.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_rp.size() != 0) begin failures++; $display("missing row pointers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
