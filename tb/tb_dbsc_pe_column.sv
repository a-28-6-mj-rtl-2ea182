// tb_dbsc_pe_column: checks a PE column: psum = sum_i x_i * w_i one cycle
// after the streamed operand, for WS and IS passes in INT12 and INT6,
// including the extreme operands (x = 4095, w = -128 on every row).
module tb_dbsc_pe_column;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stat_mode_e mode = MODE_WS;
  prec_e prec = PREC_HI;
  logic load = 0, en = 0;
  logic [15:0][11:0] x_in = '0;
  logic signed [15:0][7:0] w_in = '0;
  logic signed [23:0] psum;
  int checks = 0, failures = 0;

  dbsc_pe_column #(.ROWS(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [11:0] rx(prec_e p);
    return (p == PREC_HI) ? 12'($urandom) : 12'($urandom_range(0, 63));
  endfunction

  initial begin
    logic [15:0][11:0] hx;
    logic signed [15:0][7:0] hw;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 100; r++) begin
      @(negedge clk);
      mode = stat_mode_e'(r & 1);
      prec = prec_e'((r >> 1) & 1);
      for (int i = 0; i < 16; i++) begin hx[i] = rx(prec); hw[i] = 8'($urandom); end
      if (r == 3) for (int i = 0; i < 16; i++) begin hx[i] = 12'd4095; hw[i] = -8'sd128; end
      x_in = hx; w_in = hw; load = 1;
      @(negedge clk);
      load = 0;
      for (int t = 0; t < 6; t++) begin
        int e;
        e = 0;
        for (int i = 0; i < 16; i++) begin
          if (mode == MODE_WS) begin
            x_in[i] = rx(prec);
            if (r == 3) x_in[i] = 12'd4095;
            e += int'(x_in[i]) * int'($signed(hw[i]));
          end else begin
            w_in[i] = 8'($urandom);
            if (r == 3) w_in[i] = -8'sd128;
            e += int'(hx[i]) * int'($signed(w_in[i]));
          end
        end
        en = 1;
        @(negedge clk);
        en = 0;
        checks++;
        if (int'(psum) != e) begin
          failures++;
          if (failures < 6) $display("r %0d mode %0d prec %0d got %0d exp %0d", r, mode, prec, psum, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
