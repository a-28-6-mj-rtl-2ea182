// tb_dbsc_pe_array: checks the 16x16 array: column j gives
// sum_i x_i * w_ij, with the weights held (WS) or the inputs held (IS).
module tb_dbsc_pe_array;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stat_mode_e mode = MODE_WS;
  prec_e prec = PREC_HI;
  logic load = 0, en = 0;
  logic [15:0][11:0] x_in = '0;
  logic signed [15:0][15:0][7:0] w_in = '0;
  logic signed [15:0][23:0] psum;
  int checks = 0, failures = 0;

  dbsc_pe_array #(.ROWS(16), .COLS(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0][11:0] hx;
    logic signed [15:0][15:0][7:0] hw;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 24; r++) begin
      @(negedge clk);
      mode = stat_mode_e'(r & 1);
      prec = prec_e'((r >> 1) & 1);
      for (int i = 0; i < 16; i++) hx[i] = (prec == PREC_HI) ? 12'($urandom) : 12'($urandom_range(0, 63));
      for (int j = 0; j < 16; j++) for (int i = 0; i < 16; i++) hw[j][i] = 8'($urandom);
      x_in = hx; w_in = hw; load = 1;
      @(negedge clk);
      load = 0;
      for (int t = 0; t < 4; t++) begin
        int e [16];
        if (mode == MODE_WS)
          for (int i = 0; i < 16; i++) x_in[i] = (prec == PREC_HI) ? 12'($urandom) : 12'($urandom_range(0, 63));
        else
          for (int j = 0; j < 16; j++) for (int i = 0; i < 16; i++) w_in[j][i] = 8'($urandom);
        for (int j = 0; j < 16; j++) begin
          e[j] = 0;
          for (int i = 0; i < 16; i++)
            e[j] += (mode == MODE_WS) ? int'(x_in[i]) * int'($signed(hw[j][i])) : int'(hx[i]) * int'($signed(w_in[j][i]));
        end
        en = 1;
        @(negedge clk);
        en = 0;
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (int'($signed(psum[j])) != e[j]) begin
            failures++;
            if (failures < 6) $display("r %0d col %0d got %0d exp %0d", r, j, psum[j], e[j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
