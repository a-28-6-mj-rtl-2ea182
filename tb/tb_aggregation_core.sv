// tb_aggregation_core: the lane-wise sum of four random partial-sum words
// (including all-maximum and all-minimum words) must appear one cycle later.
module tb_aggregation_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [3:0][15:0][23:0] psum_in = '0;
  logic signed [15:0][25:0] sum_out;
  int checks = 0, failures = 0;

  aggregation_core #(.NCORE(4), .LANES(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e [16];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int l = 0; l < 16; l++) begin
        e[l] = 0;
        for (int c = 0; c < 4; c++) begin
          psum_in[c][l] = 24'($urandom);
          if (t == 1) psum_in[c][l] = 24'h7FFFFF;
          if (t == 2) psum_in[c][l] = 24'h800000;
          e[l] += int'($signed(psum_in[c][l]));
        end
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (!out_valid || int'($signed(sum_out[l])) != e[l]) begin
          failures++;
          if (failures < 6) $display("t %0d lane %0d got %0d exp %0d", t, l, $signed(sum_out[l]), e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
