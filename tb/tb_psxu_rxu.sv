// tb_psxu_rxu: checks the reconfigurable XOR unit against a column-based
// reference: in a SAS row of 64-bit words, bit c of the output is bit c of
// the input XOR bit c - W (the same row of the patch to the left), or the
// bit itself when c < W, for patch width W = 64, 32, 16.
module tb_psxu_rxu;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, row_start = 0, out_valid;
  patch_mode_e mode = PATCH_64;
  logic [63:0] bm_in, bm_out;
  int checks = 0, failures = 0;

  psxu_rxu dut (.clk, .rst_n, .in_valid, .mode, .row_start, .bm_in, .out_valid, .bm_out);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic row [0:511];
  int   W, words;
  logic [63:0] exp_o;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      mode  = patch_mode_e'(r % 3);
      W     = (mode == PATCH_64) ? 64 : (mode == PATCH_32) ? 32 : 16;
      words = 8;
      // similar neighbouring patches: copy with a few flips
      for (int c = 0; c < 64 * words; c++)
        row[c] = (c >= W && $urandom_range(0, 9) != 0) ? row[c - W] : 1'($urandom);
      for (int w = 0; w < words; w++) begin
        @(negedge clk);
        for (int b = 0; b < 64; b++) begin
          int c;
          c = 64 * w + b;
          bm_in[b] = row[c];
          exp_o[b] = (c >= W) ? (row[c] ^ row[c - W]) : row[c];
        end
        row_start = (w == 0);
        in_valid  = 1;
        #1;
        checks++;
        if (bm_out !== exp_o || !out_valid) begin
          failures++;
          if (failures < 5) $display("mode %0d w %0d got %h exp %h", mode, w, bm_out, exp_o);
        end
      end
      @(negedge clk) in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
