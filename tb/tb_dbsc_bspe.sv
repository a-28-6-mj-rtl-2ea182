// tb_dbsc_bspe: checks the bit-slice PE. Weight-stationary: a held weight
// times streamed slices; input-stationary: a held slice times streamed
// weights; products compared with plain signed multiplication.
module tb_dbsc_bspe;
  import sd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  stat_mode_e mode = MODE_WS;
  logic load = 0;
  logic signed [6:0] x_in = 0;
  logic signed [7:0] w_in = 0;
  logic signed [14:0] prod;
  int checks = 0, failures = 0;

  dbsc_bspe dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [7:0] hw;
    logic signed [6:0] hx;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      mode = stat_mode_e'(r & 1);
      hw = 8'($urandom); hx = 7'($urandom);
      if (r == 3) begin hw = -8'sd128; hx = -7'sd64; end
      x_in = hx; w_in = hw; load = 1;
      @(negedge clk);
      load = 0;
      for (int t = 0; t < 8; t++) begin
        logic signed [14:0] e;
        x_in = 7'($urandom); w_in = 8'($urandom);
        #1;
        e = (mode == MODE_WS) ? 15'(int'(x_in) * int'(hw)) : 15'(int'(hx) * int'(w_in));
        checks++;
        if (prod !== e) begin
          failures++;
          if (failures < 6) $display("mode %0d got %0d exp %0d", mode, prod, e);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
