// tb_dbsc: checks a dual-mode bit-slice core through its memories.
// IMEM and WMEM are filled with random data; then
//   1. WS INT12 pass, N = 20 steps, overwrite
//   2. WS INT12 pass on the same outputs with acc = 1 (accumulate)
//   3. WS INT6 pass
//   4. IS INT12 pass over all 9 weight sets, wrapping from set 4
//   5. saturation: WS INT12 pass with all-4095 inputs and all -128 weights,
//      accumulated 3 times, must clamp at -2^23
// OMEM contents are compared with a reference model, and done must come
// N + 5 cycles after start.
module tb_dbsc;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic imem_we = 0, wmem_we = 0, start = 0, acc = 0, omem_re = 0, busy, done;
  logic [7:0] imem_waddr = 0, in_base = 0, out_base = 0, omem_raddr = 0;
  logic [15:0][11:0] imem_wdata = '0;
  logic [3:0] wmem_wset = 0, wmem_wrow = 0, wset = 0;
  logic signed [15:0][7:0] wmem_wdata = '0;
  stat_mode_e mode = MODE_WS;
  prec_e prec = PREC_HI;
  logic [8:0] n_steps = 0;
  logic signed [15:0][23:0] omem_rdata;
  int checks = 0, failures = 0;

  dbsc dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [11:0] im [256][16];
  int          wm [9][16][16];    // [set][row][col]
  longint      om [256][16];

  task automatic wr_imem(int a, logic [15:0][11:0] d);
    @(negedge clk); imem_we = 1; imem_waddr = 8'(a); imem_wdata = d;
    for (int i = 0; i < 16; i++) im[a][i] = d[i];
    @(negedge clk); imem_we = 0;
  endtask

  task automatic wr_wmem(int s, int r, logic signed [15:0][7:0] d);
    @(negedge clk); wmem_we = 1; wmem_wset = 4'(s); wmem_wrow = 4'(r); wmem_wdata = d;
    for (int c = 0; c < 16; c++) wm[s][r][c] = int'($signed(d[c]));
    @(negedge clk); wmem_we = 0;
  endtask

  function automatic longint sat(longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  task automatic run(stat_mode_e m, prec_e p, logic a, int ws, int ib, int ob, int n);
    int t0, t1;
    // reference
    for (int t = 0; t < n; t++) begin
      for (int c = 0; c < 16; c++) begin
        longint s;
        s = 0;
        for (int r = 0; r < 16; r++) begin
          if (m == MODE_WS) s += longint'(im[ib + t][r]) * wm[ws][r][c];
          else              s += longint'(im[ib][r]) * wm[(ws + t) % 9][r][c];
        end
        om[ob + t][c] = a ? sat(om[ob + t][c] + s) : s;
      end
    end
    @(negedge clk);
    mode = m; prec = p; acc = a; wset = 4'(ws); in_base = 8'(ib); out_base = 8'(ob);
    n_steps = 9'(n); start = 1;
    t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != n + 5) begin
      failures++; $display("latency %0d exp %0d", (t1 - t0) / 10, n + 5);
    end
  endtask

  task automatic check_omem(int ob, int n);
    for (int t = 0; t < n; t++) begin
      @(negedge clk); omem_re = 1; omem_raddr = 8'(ob + t);
      @(negedge clk); omem_re = 0;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (longint'($signed(omem_rdata[c])) != om[ob + t][c]) begin
          failures++;
          if (failures < 8) $display("omem[%0d][%0d] got %0d exp %0d", ob + t, c, $signed(omem_rdata[c]), om[ob + t][c]);
        end
      end
    end
  endtask

  initial begin
    logic [15:0][11:0] d;
    logic signed [15:0][7:0] w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      for (int i = 0; i < 16; i++) d[i] = (a >= 32 && a < 48) ? 12'($urandom_range(0, 63)) : 12'($urandom);
      if (a == 60) for (int i = 0; i < 16; i++) d[i] = 12'd4095;
      wr_imem(a, d);
    end
    for (int s = 0; s < 9; s++)
      for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) w[c] = 8'($urandom);
        if (s == 8) for (int c = 0; c < 16; c++) w[c] = -8'sd128;
        wr_wmem(s, r, w);
      end
    run(MODE_WS, PREC_HI, 0, 2, 0, 10, 20);   check_omem(10, 20);
    run(MODE_WS, PREC_HI, 1, 5, 5, 10, 20);   check_omem(10, 20);
    run(MODE_WS, PREC_LO, 0, 1, 32, 100, 16); check_omem(100, 16);
    run(MODE_IS, PREC_HI, 0, 4, 7, 200, 9);   check_omem(200, 9);
    run(MODE_WS, PREC_HI, 0, 8, 60, 250, 1);
    run(MODE_WS, PREC_HI, 1, 8, 60, 250, 1);
    run(MODE_WS, PREC_HI, 1, 8, 60, 250, 1);  check_omem(250, 1);
    checks++;
    if (om[250][0] != -8388608) begin failures++; $display("saturation case not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
