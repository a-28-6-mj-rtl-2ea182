// tb_dbsc_cluster: each of the four cores gets its own inputs and weights
// (a different input-channel slice); one WS pass runs on all four, and the
// aggregated output word t must equal the sum over cores of
// sum_r x[core][t][r] * w[core][r][c], two cycles after agg_re. Then an
// INT6 pass on the same data region checks the precision control.
module tb_dbsc_cluster;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] core_sel = 0;
  logic imem_we = 0, wmem_we = 0, start = 0, acc = 0, agg_re = 0, busy, done, out_valid;
  logic [7:0] imem_waddr = 0, in_base = 0, out_base = 0, agg_raddr = 0;
  logic [15:0][11:0] imem_wdata = '0;
  logic [3:0] wmem_wset = 0, wmem_wrow = 0, wset = 0;
  logic signed [15:0][7:0] wmem_wdata = '0;
  stat_mode_e mode = MODE_WS;
  prec_e prec = PREC_HI;
  logic [8:0] n_steps = 0;
  logic signed [15:0][25:0] out_data;
  int checks = 0, failures = 0;

  dbsc_cluster dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [11:0] im [4][16][16];
  int          wm [4][16][16];

  task automatic pass_and_check(prec_e p, int n);
    @(negedge clk);
    mode = MODE_WS; prec = p; acc = 0; wset = 0; in_base = 0; out_base = 0; n_steps = 9'(n); start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    for (int t = 0; t < n; t++) begin
      int e [16];
      for (int c = 0; c < 16; c++) begin
        e[c] = 0;
        for (int k = 0; k < 4; k++)
          for (int r = 0; r < 16; r++) e[c] += int'(im[k][t][r]) * wm[k][r][c];
      end
      @(negedge clk); agg_re = 1; agg_raddr = 8'(t);
      @(negedge clk); agg_re = 0;
      @(negedge clk);
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (!out_valid || int'($signed(out_data[c])) != e[c]) begin
          failures++;
          if (failures < 6) $display("t %0d c %0d got %0d exp %0d", t, c, $signed(out_data[c]), e[c]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      for (int a = 0; a < 16; a++) begin
        @(negedge clk);
        core_sel = 2'(k); imem_we = 1; imem_waddr = 8'(a);
        for (int i = 0; i < 16; i++) begin imem_wdata[i] = 12'($urandom); im[k][a][i] = imem_wdata[i]; end
        @(negedge clk) imem_we = 0;
      end
      for (int r = 0; r < 16; r++) begin
        @(negedge clk);
        core_sel = 2'(k); wmem_we = 1; wmem_wset = 0; wmem_wrow = 4'(r);
        for (int c = 0; c < 16; c++) begin wmem_wdata[c] = 8'($urandom); wm[k][r][c] = int'($signed(wmem_wdata[c])); end
        @(negedge clk) wmem_we = 0;
      end
    end
    pass_and_check(PREC_HI, 16);
    // INT6 view of the same memories: only the low 6 bits count
    for (int k = 0; k < 4; k++) for (int a = 0; a < 16; a++) for (int i = 0; i < 16; i++) im[k][a][i] &= 12'h03F;
    pass_and_check(PREC_LO, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
