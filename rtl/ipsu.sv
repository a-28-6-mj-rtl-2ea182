// ipsu: important pixel spotting unit (text-based important pixel spotting).
// After cross-attention softmax, the score of each pixel query against the
// CLS token (CAS) tells how little the pixel depends on the text: a small
// CAS means the text tokens took most of the attention. The IPSU forms the
// threshold Th = min{CAS} + margin, compares every CAS_i against it, and
// when CAS_i < Th stores the pixel index i (from a pixel counter CNT) into
// the important-index register at address Addr, then increments Addr.
// These pieces (adder, Th register, comparator, Addr incrementer, CNT,
// index register) are the paper's. Widths, the depth of the index register
// (one entry per pixel of a 64x64 latent), the start/min handshake and the
// read port are this design's choices. Indices are stored in increasing
// order, which lets the SIMD core merge them with a pixel stream.
// Timing: one CAS per cycle; Addr/CNT update on the clock edge after
// cas_valid; the index register is read combinationally.
// rst_n also disables the protocol assertion below; lint reports that as a
// synchronous use of the asynchronous reset, which is harmless.
module ipsu #(
  parameter int unsigned CAS_W = 12,     // CAS format: unsigned Q0.12
  parameter int unsigned NPIX  = 4096,   // pixels per image (64x64 latent)
  localparam int unsigned IDX_W = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,       // new image: clear CNT and Addr
  input  logic [CAS_W-1:0] margin,
  input  logic             min_valid,   // min{CAS} from the SIMD core
  input  logic [CAS_W-1:0] min_cas,
  input  logic             cas_valid,   // CAS_i, i = 0, 1, 2, ...
  input  logic [CAS_W-1:0] cas_in,
  output logic             important,   // CAS_i < Th for the current input
  output logic [IDX_W:0]   imp_count,   // number of indices stored (Addr)
  output logic [IDX_W:0]   pix_count,   // pixels seen (CNT)
  input  logic [IDX_W-1:0] idx_raddr,
  output logic [IDX_W-1:0] idx_rdata
);
  logic [CAS_W:0]   th;                 // one bit wider: min + margin may carry
  logic [IDX_W-1:0] idx_reg [NPIX];

  assign important = cas_valid && ({1'b0, cas_in} < th);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th        <= '0;
      imp_count <= '0;
      pix_count <= '0;
    end else begin
      if (min_valid) th <= {1'b0, min_cas} + {1'b0, margin};
      if (start) begin
        imp_count <= '0;
        pix_count <= '0;
      end else if (cas_valid) begin
        pix_count <= pix_count + 1'b1;
        if (important) imp_count <= imp_count + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!start && important) idx_reg[imp_count[IDX_W-1:0]] <= pix_count[IDX_W-1:0];
  end

  assign idx_rdata = idx_reg[idx_raddr];

  assert property (@(posedge clk) disable iff (!rst_n) cas_valid |-> pix_count < (IDX_W+1)'(NPIX));
endmodule
