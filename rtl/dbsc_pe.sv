// dbsc_pe: processing element of the DBSC PE array.
// The bit slicer splits a 12-bit unsigned activation into a high and a low
// 6-bit part and zero-extends each to a 7-bit signed slice; each slice feeds
// its own bit-slice PE (BSPE), both with the same weight. The left BSPE
// takes the MSB slice, the right one the LSB slice (paper's figure).
// In low-precision (INT6) passes the activation sits in the low 6 bits, so
// the MSB BSPE is given a zero input (this design's way of letting it idle;
// the paper says only that the two trees are then added without a shift).
module dbsc_pe
  import sd_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  stat_mode_e               mode,
  input  prec_e                    prec,
  input  logic                     load,
  input  logic [ACT_W-1:0]         x_in,     // unsigned 12-bit input
  input  logic signed [WGT_W-1:0]  w_in,
  output logic signed [PROD_W-1:0] prod_hi,  // MSB slice product (left)
  output logic signed [PROD_W-1:0] prod_lo   // LSB slice product (right)
);
  logic signed [SLICE_W-1:0] s_hi, s_lo;

  // bit slicer: {0, MSB 6bit} and {0, LSB 6bit}
  assign s_hi = (prec == PREC_HI) ? {1'b0, x_in[11:6]} : '0;
  assign s_lo = {1'b0, x_in[5:0]};

  dbsc_bspe u_left  (.clk, .rst_n, .mode, .load, .x_in(s_hi), .w_in, .prod(prod_hi));
  dbsc_bspe u_right (.clk, .rst_n, .mode, .load, .x_in(s_lo), .w_in, .prod(prod_lo));
endmodule
