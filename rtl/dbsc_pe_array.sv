// dbsc_pe_array: 16 x 16 PE array of a dual-mode bit-slice core.
// Input path: input x_i is broadcast along PE row i to all 16 columns.
// Weight path: PE (i, j) receives its own weight w_ij down column j.
// Column j produces psum_j = sum_i x_i * w_ij. Which operand is held in the
// BSPE registers is set by mode: WS loads the weights (load = 1) and then
// streams one input vector per cycle; IS loads one input vector and then
// streams one weight matrix per cycle. The same 16 outputs per cycle come
// out either way, one cycle after the streamed operand is applied.
// Row/column broadcast follows the paper's figure (input lines horizontal,
// weight lines vertical); that every PE has its own weight line rather than
// a shift chain is this design's choice.
module dbsc_pe_array
  import sd_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  stat_mode_e                                   mode,
  input  prec_e                                        prec,
  input  logic                                         load,
  input  logic                                         en,
  input  logic [ROWS-1:0][ACT_W-1:0]                   x_in,
  input  logic signed [COLS-1:0][ROWS-1:0][WGT_W-1:0]  w_in,   // [col][row]
  output logic signed [COLS-1:0][PSUM_W-1:0]           psum
);
  for (genvar j = 0; j < COLS; j++) begin : g_col
    dbsc_pe_column #(.ROWS(ROWS)) u_col (
      .clk, .rst_n, .mode, .prec, .load, .en,
      .x_in,
      .w_in(w_in[j]),
      .psum(psum[j])
    );
  end
endmodule
