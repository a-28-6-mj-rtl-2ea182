// tb_psxu_bgu: checks the bitmap generator unit. Random rows of 64 pruned
// scores (about half of them zero, some with a single set bit so each bit
// position of the OR tree is exercised) must give bitmap bit i = (score i
// != 0) one cycle after the input.
module tb_psxu_bgu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [63:0][11:0] sas_in;
  logic [63:0] bitmap, exp_bm;
  int checks = 0, failures = 0;

  psxu_bgu #(.LANES(64), .DW(12)) dut (.clk, .rst_n, .in_valid, .sas_in, .out_valid, .bitmap);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sas_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int i = 0; i < 64; i++) begin
        case ($urandom_range(0, 3))
          0, 1: sas_in[i] = '0;
          2:    sas_in[i] = 12'(1 << $urandom_range(0, 11));
          default: sas_in[i] = 12'($urandom);
        endcase
        exp_bm[i] = (sas_in[i] != 0);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || bitmap !== exp_bm) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d got %h exp %h", t, bitmap, exp_bm);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
