// tb_psxu: end-to-end check of the PSXU. Rows of pruned 12-bit scores
// with patch-wise similarity are streamed for each patch size; the
// reference prunes to a bitmap, XORs every bit with the bit one patch to
// the left (column c - W) and expects the column indices of the result, in
// order, plus the row pointer of each patch row. Back-pressure on the
// column stream makes the input stall; stalls are counted and must occur.
module tb_psxu;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, row_start = 0, band_start = 0, col_ready = 1;
  logic [63:0][11:0] sas_in = '0;
  patch_mode_e mode = PATCH_16;
  logic [5:0] word_idx = 0;
  logic aug_valid, rp_valid, col_valid;
  logic [63:0] aug_bitmap;
  logic [2:0] rp_count;
  logic [3:0][5:0] rp_patch;
  logic [3:0][12:0] rp_ptr;
  logic [3:0][6:0] rp_nnz;
  csr_col_t col_out;
  int checks = 0, failures = 0, stalls = 0;

  psxu dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_cols [$];
  int exp_ptr [$];
  int acc [64];

  always @(posedge clk) col_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && in_valid && !in_ready) stalls++;

  always @(posedge clk) if (rst_n) begin
    if (col_valid && col_ready) begin
      int e;
      e = exp_cols.pop_front();
      checks++;
      if ({col_out.seg, col_out.col} != 8'(e)) begin
        failures++;
        if (failures < 6) $display("col got %0d/%0d exp %0d/%0d", col_out.seg, col_out.col, e >> 6, e & 63);
      end
    end
    if (rp_valid) begin
      for (int s = 0; s < rp_count; s++) begin
        int e;
        e = exp_ptr.pop_front();
        checks++;
        if (rp_ptr[s] != e) begin
          failures++;
          if (failures < 6) $display("rp got %0d exp %0d", rp_ptr[s], e);
        end
      end
    end
  end

  initial begin
    int W, ppw, wpr;
    logic bits [0:4095];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 2; m >= 0; m--) begin
      mode = patch_mode_e'(m);
      W = (m == 0) ? 64 : (m == 1) ? 32 : 16;
      ppw = 64 / W; wpr = W * W / 64;
      for (int r = 0; r < ((m == 0) ? 3 : W + 2); r++) begin
        for (int c = 0; c < W * W; c++)
          bits[c] = (c >= W && $urandom_range(0, 7) != 0) ? bits[c - W] : ($urandom_range(0, 2) == 0);
        for (int w = 0; w < wpr; w++) begin
          @(negedge clk);
          for (int b = 0; b < 64; b++) sas_in[b] = bits[64*w + b] ? 12'($urandom_range(1, 4095)) : 12'd0;
          for (int s = 0; s < ppw; s++) begin
            int p, n;
            p = w * ppw + s; n = 0;
            if (r % W == 0) acc[p] = 0;
            for (int b = s * W; b < (s + 1) * W; b++) begin
              int c; logic x;
              c = 64 * w + b;
              x = (c >= W) ? (bits[c] ^ bits[c - W]) : bits[c];
              if (x) begin exp_cols.push_back(s * 64 + b - s * W); n++; end
            end
            exp_ptr.push_back(acc[p]);
            acc[p] += n;
          end
          row_start = (w == 0); band_start = (r % W == 0); word_idx = 6'(w); in_valid = 1;
          do @(posedge clk); while (!in_ready);
        end
        @(negedge clk) in_valid = 0;
      end
    end
    while (exp_cols.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_ptr.size() != 0 || stalls == 0) begin
      failures++; $display("left %0d pointers, %0d stalls", exp_ptr.size(), stalls);
    end
    $display("input stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
