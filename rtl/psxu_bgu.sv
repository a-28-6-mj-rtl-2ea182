// psxu_bgu: bitmap generator unit of the PSXU.
// Takes LANES (64) pruned 12-bit SAS values from one row of the
// self-attention score matrix per cycle and produces a LANES-bit bitmap,
// bit i = 1 when value i is nonzero. One BiG (4-stage OR tree) per lane,
// as in the paper; the output is registered (the "64b Bitmap" register of
// the figure), so the bitmap appears one cycle after the input.
// Lane 0 of the input is bit 0 of the bitmap (own choice of bit order).
module psxu_bgu #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [LANES-1:0][DW-1:0] sas_in,
  output logic                     out_valid,
  output logic [LANES-1:0]         bitmap
);
  logic [LANES-1:0] bits;

  for (genvar i = 0; i < LANES; i++) begin : g_big
    psxu_big #(.DW(DW)) u_big (.sas(sas_in[i]), .bit_o(bits[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      bitmap    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) bitmap <= bits;
    end
  end
endmodule
