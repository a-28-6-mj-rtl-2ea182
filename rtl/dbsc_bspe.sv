// dbsc_bspe: bit-slice processing element of the dual-mode bit-slice core.
// Holds one 8-bit stationary operand and multiplies a 7-bit signed input
// slice by an 8-bit signed weight (INT7 x INT8 -> 15-bit product).
// A mux at the register input picks what is held: the input slice in
// input-stationary mode (IS, CNN layers) or the weight in weight-stationary
// mode (WS, transformer layers). Two muxes at the multiplier pick the held
// value for the stationary operand and the streaming path for the other.
// The three muxes, 8-bit register and INT7 x INT8 multiplier are drawn in
// the paper; the load enable and the sign extension of the held input
// slice into the 8-bit register are this design's. The product is
// combinational; the register loads on the clock edge when load is high.
module dbsc_bspe
  import sd_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  stat_mode_e                mode,
  input  logic                      load,     // capture stationary operand
  input  logic signed [SLICE_W-1:0] x_in,     // input path (slice)
  input  logic signed [WGT_W-1:0]   w_in,     // weight path
  output logic signed [PROD_W-1:0]  prod
);
  logic signed [7:0] held, d;
  logic signed [SLICE_W-1:0] a;
  logic signed [WGT_W-1:0]   b;

  assign d = (mode == MODE_IS) ? 8'(x_in) : w_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    held <= '0;
    else if (load) held <= d;
  end

  assign a = (mode == MODE_IS) ? held[SLICE_W-1:0] : x_in;
  assign b = (mode == MODE_IS) ? w_in : held;
  // operands widened first so the product keeps all 15 bits
  assign prod = PROD_W'(a) * PROD_W'(b);
endmodule
