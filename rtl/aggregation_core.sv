// aggregation_core: adds the partial sums of the DBSCs of one cluster.
// The four DBSCs of a cluster work on different slices of the input
// channels of the same outputs; the aggregation core adds their 16-lane
// partial-sum words lane by lane into the cluster's final output.
// The paper gives the function only. Here: NCORE words in, one registered
// word out one cycle after in_valid; the output is PSUM_W + 2 bits wide so
// the sum of four saturated partial sums cannot overflow.
module aggregation_core
  import sd_pkg::*;
#(
  parameter int unsigned NCORE = 4,
  parameter int unsigned LANES = 16,
  localparam int unsigned OW   = PSUM_W + $clog2(NCORE)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          in_valid,
  input  logic signed [NCORE-1:0][LANES-1:0][PSUM_W-1:0] psum_in,
  output logic                                          out_valid,
  output logic signed [LANES-1:0][OW-1:0]               sum_out
);
  logic signed [LANES-1:0][OW-1:0] s;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      s[l] = '0;
      for (int c = 0; c < int'(NCORE); c++) s[l] = s[l] + OW'($signed(psum_in[c][l]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum_out   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum_out <= s;
    end
  end
endmodule
