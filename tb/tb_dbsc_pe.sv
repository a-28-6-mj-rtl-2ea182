// tb_dbsc_pe: checks the DBSC PE: (left << 6) + right must equal x * w for
// INT12 inputs, and left = 0, right = x * w for INT6 inputs, in both
// stationary modes.
module tb_dbsc_pe;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stat_mode_e mode = MODE_WS;
  prec_e prec = PREC_HI;
  logic load = 0;
  logic [11:0] x_in = 0;
  logic signed [7:0] w_in = 0;
  logic signed [14:0] prod_hi, prod_lo;
  int checks = 0, failures = 0;

  dbsc_pe dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [7:0] hw;
    logic [11:0] hx;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      mode = stat_mode_e'(r & 1);
      prec = prec_e'((r >> 1) & 1);
      hw = 8'($urandom);
      hx = (prec == PREC_HI) ? 12'($urandom) : 12'($urandom_range(0, 63));
      x_in = hx; w_in = hw; load = 1;
      @(negedge clk);
      load = 0;
      for (int t = 0; t < 8; t++) begin
        int e, got;
        logic [11:0] xs; logic signed [7:0] ws;
        xs = (prec == PREC_HI) ? 12'($urandom) : 12'($urandom_range(0, 63));
        ws = 8'($urandom);
        x_in = xs; w_in = ws;
        #1;
        e   = (mode == MODE_WS) ? int'(xs) * int'(hw) : int'(hx) * int'(ws);
        got = (prec == PREC_HI) ? int'(prod_hi) * 64 + int'(prod_lo) : int'(prod_hi) + int'(prod_lo);
        checks++;
        if (got != e || (prec == PREC_LO && prod_hi != 0)) begin
          failures++;
          if (failures < 6) $display("mode %0d prec %0d got %0d exp %0d", mode, prec, got, e);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
