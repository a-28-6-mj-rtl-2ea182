// tb_global_memory: writes random words to random addresses in both banks
// (192 KB, 8192 words), then reads them back in random order and compares.
module tb_global_memory;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [12:0] waddr = 0, raddr = 0;
  logic [15:0][11:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  global_memory dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [191:0] model [int];
    int addrs [$];
    repeat (2) @(posedge clk);
    for (int k = 0; k < 600; k++) begin
      int a;
      a = (k == 0) ? 0 : (k == 1) ? 8191 : (k == 2) ? 4095 : (k == 3) ? 4096 : $urandom_range(0, 8191);
      @(negedge clk);
      we = 1; waddr = 13'(a);
      for (int l = 0; l < 16; l++) wdata[l] = 12'($urandom);
      if (!model.exists(a)) addrs.push_back(a);
      model[a] = wdata;
    end
    @(negedge clk) we = 0;
    addrs.shuffle();
    foreach (addrs[i]) begin
      @(negedge clk); re = 1; raddr = 13'(addrs[i]);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[addrs[i]]) begin
        failures++;
        if (failures < 6) $display("addr %0d mismatch", addrs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
