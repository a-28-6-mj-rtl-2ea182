// simd_requant: on-chip requantization of the SIMD core. Turns a word of
// aggregated partial sums (signed, PSUM_W + 2 bits per lane) into unsigned
// 12-bit activations: arithmetic shift right by `shift` with rounding, then
// clamp to [0, 4095]. Negative values clamp to zero, which doubles as a
// ReLU; the shift-and-clamp format is this design's choice. Registered,
// 1 cycle.
module simd_requant
  import sd_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned IW    = PSUM_W + 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [4:0]                    shift,
  input  logic                          in_valid,
  input  logic signed [LANES-1:0][IW-1:0] in_psum,
  output logic                          out_valid,
  output logic [LANES-1:0][ACT_W-1:0]   out_act
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_act   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < int'(LANES); l++) begin
          logic signed [IW:0] r;
          logic signed [IW:0] rnd;
          rnd = (shift == 0) ? '0 : (IW+1)'(1) <<< (shift - 1);
          r = ((IW+1)'($signed(in_psum[l])) + rnd) >>> shift;
          if (r < 0)                    out_act[l] <= '0;
          else if (r > (IW+1)'(4095))   out_act[l] <= 12'd4095;
          else                          out_act[l] <= r[ACT_W-1:0];
        end
      end
    end
  end
endmodule
