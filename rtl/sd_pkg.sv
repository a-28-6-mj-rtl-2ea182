// sd_pkg: types and constants shared by the stable diffusion processor.
// Sizes follow the paper where it prints them (16x16 PE array, 12-bit
// unsigned activations, 8-bit signed weights, 7-bit signed bit slices,
// 64-lane bitmap generator, patch sizes 16/32/64). Widths of partial sums,
// score formats and the encodings below are this design's own choices.
package sd_pkg;

  // Activation / weight formats (paper: A INT12/6, W INT8)
  localparam int unsigned ACT_W   = 12;
  localparam int unsigned WGT_W   = 8;
  localparam int unsigned SLICE_W = 7;   // signed bit slice: {1'b0, 6 bits}
  localparam int unsigned PROD_W  = SLICE_W + WGT_W;   // INT7 x INT8
  localparam int unsigned PSUM_W  = 24;  // column / OMEM partial sum (own choice)

  // PE array geometry (paper: 16x16)
  localparam int unsigned PE_ROWS = 16;
  localparam int unsigned PE_COLS = 16;

  // DBSC stationary mode (paper: IS for CNN, WS for transformer)
  typedef enum logic {
    MODE_IS = 1'b0,   // input stationary
    MODE_WS = 1'b1    // weight stationary
  } stat_mode_e;

  // Activation precision of a pass (paper: INT12 important, INT6 otherwise)
  typedef enum logic {
    PREC_LO = 1'b0,   // INT6 activation in the low slice, adder trees added directly
    PREC_HI = 1'b1    // INT12 activation, high tree shifted by 6 then added
  } prec_e;

  // RXU patch size (paper: 64x64, 32x32, 16x16). Encoding = RXU mux select.
  typedef enum logic [1:0] {
    PATCH_64 = 2'd0,
    PATCH_32 = 2'd1,
    PATCH_16 = 2'd2
  } patch_mode_e;

  // PSXU

  // One CSR column index emitted by the patch-wise CSR encoder
  typedef struct packed {
    logic [1:0] seg;      // which 16-bit segment / patch of the input word
    logic [5:0] col;      // column inside the patch (0..patch width-1)
  } csr_col_t;

endpackage
