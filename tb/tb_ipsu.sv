// tb_ipsu: checks important pixel spotting. For several images a random
// min{CAS} and margin are given, then random CAS values (some at and around
// the threshold); the reference list holds every i with CAS_i < min + margin.
// The stored index list, its count and the pixel count are compared.
module tb_ipsu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NPIX = 256;
  logic start = 0, min_valid = 0, cas_valid = 0, important;
  logic [11:0] margin = 0, min_cas = 0, cas_in = 0;
  logic [8:0] imp_count, pix_count;
  logic [7:0] idx_raddr = 0, idx_rdata;
  int checks = 0, failures = 0;

  ipsu #(.CAS_W(12), .NPIX(NPIX)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_idx [$];
    int th, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 6; img++) begin
      exp_idx.delete();
      n = (img == 5) ? NPIX : $urandom_range(20, NPIX);
      @(negedge clk);
      start = 1; min_valid = 1;
      min_cas = 12'($urandom_range(0, 1500)); margin = 12'($urandom_range(0, 1000));
      if (img == 4) begin min_cas = 12'hFFF; margin = 12'hFFF; end   // carry in the adder
      th = min_cas + margin;
      @(negedge clk);
      start = 0; min_valid = 0;
      for (int i = 0; i < n; i++) begin
        case ($urandom_range(0, 2))
          0: cas_in = 12'((th > 4095) ? 4095 : th);
          1: cas_in = 12'($urandom_range(min_cas, (th > 4095) ? 4095 : th));
          default: cas_in = 12'($urandom);
        endcase
        if (cas_in < th) exp_idx.push_back(i);
        cas_valid = 1;
        @(negedge clk);
      end
      cas_valid = 0;
      @(negedge clk);
      checks++;
      if (imp_count != exp_idx.size() || pix_count != n) begin
        failures++; $display("img %0d count %0d exp %0d pix %0d", img, imp_count, exp_idx.size(), pix_count);
      end
      for (int k = 0; k < exp_idx.size(); k++) begin
        idx_raddr = 8'(k);
        #1;
        checks++;
        if (idx_rdata != exp_idx[k]) begin
          failures++;
          if (failures < 6) $display("idx %0d got %0d exp %0d", k, idx_rdata, exp_idx[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
