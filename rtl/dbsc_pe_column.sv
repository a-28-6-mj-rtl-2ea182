// dbsc_pe_column: one column of the DBSC PE array.
// 16 PEs share nothing but their outputs: every MSB-slice (left) product of
// the column goes to one adder tree and every LSB-slice (right) product to
// the other. The bit-slice adder then combines the two tree sums:
//   INT12 pass: (left << 6) + right   (the two slices of one activation)
//   INT6 pass:   left + right         (added directly; left is zero here)
// Column output = sum over rows i of x_i * w_i, registered (1 cycle).
// Structure (16 PEs, 2 adder trees, bit-slice adder under precision
// control) is the paper's; the pipeline register and widths are this
// design's.
module dbsc_pe_column
  import sd_pkg::*;
#(
  parameter int unsigned ROWS = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  stat_mode_e                         mode,
  input  prec_e                              prec,
  input  logic                               load,
  input  logic                               en,      // register the column sum
  input  logic [ROWS-1:0][ACT_W-1:0]         x_in,    // one input per row
  input  logic signed [ROWS-1:0][WGT_W-1:0]  w_in,    // one weight per PE
  output logic signed [PSUM_W-1:0]           psum
);
  localparam int unsigned TREE_W = PROD_W + $clog2(ROWS) + 1;

  logic signed [PROD_W-1:0] p_hi [ROWS];
  logic signed [PROD_W-1:0] p_lo [ROWS];

  for (genvar i = 0; i < ROWS; i++) begin : g_pe
    dbsc_pe u_pe (
      .clk, .rst_n, .mode, .prec, .load,
      .x_in   (x_in[i]),
      .w_in   (w_in[i]),
      .prod_hi(p_hi[i]),
      .prod_lo(p_lo[i])
    );
  end

  // two adder trees
  logic signed [TREE_W-1:0] sum_hi, sum_lo;
  dbsc_adder_tree #(.N(ROWS), .IW(PROD_W), .OW(TREE_W)) u_tree_hi (.in(p_hi), .sum(sum_hi));
  dbsc_adder_tree #(.N(ROWS), .IW(PROD_W), .OW(TREE_W)) u_tree_lo (.in(p_lo), .sum(sum_lo));

  // bit-slice adder
  logic signed [PSUM_W-1:0] bsa;
  always_comb begin
    if (prec == PREC_HI) bsa = (PSUM_W'(sum_hi) <<< 6) + PSUM_W'(sum_lo);
    else                 bsa = PSUM_W'(sum_hi) + PSUM_W'(sum_lo);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  psum <= '0;
    else if (en) psum <= bsa;
  end
endmodule
