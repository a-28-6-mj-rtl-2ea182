// simd_softmax: row softmax of the SIMD core, with CLS-score tracking.
// Scores of one pixel query against the L text keys arrive one per cycle
// (signed Q8.8, first one = the CLS token). The unit keeps the row in a
// buffer while tracking its maximum, then in a second pass computes
// e_j = 2^((s_j - max) * log2 e) and their sum, and in a third pass emits
// p_j = e_j / sum as unsigned Q0.12 (4095 = 1.0 - 1 lsb), one per cycle.
// p_0 is the CLS attention score CAS of the pixel; the unit keeps the
// minimum CAS over all rows since clear_min, as TIPS needs.
// Exponential: 2^-(n+f) = 2^-n * (1 - f/2) (linear in the fraction, own
// choice, max error about 6 %); log2 e is taken as 369/256. Division by /.
// Timing: a row of L scores takes L input cycles, L exp cycles and L
// output cycles, plus one cycle in the output register; in_ready is low
// from the last input until the last output.
module simd_softmax #(
  parameter int unsigned LMAX = 128     // longest row (77 CLIP tokens fit)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear_min,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [15:0] in_score,
  input  logic               in_last,
  output logic               out_valid,
  output logic [11:0]        out_prob,
  output logic               out_first,   // out_prob is this row's CAS
  output logic               out_last,
  output logic [11:0]        min_cas
);
  localparam int unsigned LA = $clog2(LMAX);
  typedef enum logic [1:0] {P_IN, P_EXP, P_OUT} phase_e;

  phase_e            ph;
  logic signed [15:0] sbuf [LMAX];
  logic [16:0]       ebuf [LMAX];       // Q1.16, 1.0 = 65536
  logic signed [15:0] mx;
  logic [LA:0]       len, idx;
  logic [LA+17:0]    sum;

  // e = 2^((s - max) * log2 e)
  function automatic logic [16:0] exp2q(input logic signed [15:0] s, input logic signed [15:0] m);
    logic [16:0] d;         // max - s >= 0, Q8.8
    logic [25:0] y;         // d * log2 e, Q8.16 after * 369 (Q.8)
    logic [9:0]  n;
    logic [15:0] f;
    logic [16:0] base;
    d = 17'(32'(m) - 32'(s));
    y = 26'(d) * 26'd369;   // Q8.8 * Q.8 -> Q.16
    n = y[25:16];
    f = y[15:0];
    base = 17'd65536 - 17'(f >> 1);
    if (n > 10'd16) return '0;
    return base >> n;
  endfunction

  assign in_ready = (ph == P_IN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IN; mx <= '0; len <= '0; idx <= '0; sum <= '0;
      out_valid <= 1'b0; out_prob <= '0; out_first <= 1'b0; out_last <= 1'b0;
      min_cas <= 12'hFFF;
    end else begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      if (clear_min) min_cas <= 12'hFFF;
      unique case (ph)
        P_IN: if (in_valid) begin
          sbuf[len[LA-1:0]] <= in_score;
          mx  <= (len == '0 || in_score > mx) ? in_score : mx;
          if (in_last || len == (LA+1)'(LMAX - 1)) begin
            ph <= P_EXP; idx <= '0; sum <= '0;
          end
          len <= len + 1'b1;
        end
        P_EXP: begin
          ebuf[idx[LA-1:0]] <= exp2q(sbuf[idx[LA-1:0]], mx);
          sum <= sum + (LA+18)'(exp2q(sbuf[idx[LA-1:0]], mx));
          if (idx == len - 1'b1) begin ph <= P_OUT; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        P_OUT: begin
          logic [LA+30:0] q;
          logic [11:0]    p;
          q = ((LA+31)'(ebuf[idx[LA-1:0]]) << 12) / (LA+31)'(sum);
          p = (q > 4095) ? 12'd4095 : q[11:0];
          out_valid <= 1'b1;
          out_prob  <= p;
          out_first <= (idx == '0);
          out_last  <= (idx == len - 1'b1);
          if (idx == '0 && !clear_min && p < min_cas) min_cas <= p;
          if (idx == len - 1'b1) begin ph <= P_IN; len <= '0; end
          else idx <= idx + 1'b1;
        end
        default: ph <= P_IN;
      endcase
    end
  end
endmodule
