// psxu_big: one bitmap generator (BiG) of the PSXU bitmap generator unit.
// A pruned self-attention score (SAS) is either zero (pruned) or not; the
// BiG reduces its 12 bits to a 1-bit "nonzero" flag with a 4-stage OR tree
// (12 -> 6 -> 3 -> 2 -> 1), as drawn in the PSXU figure of the paper.
// Purely combinational.
module psxu_big #(
  parameter int unsigned DW = 12
) (
  input  logic [DW-1:0] sas,
  output logic          bit_o
);
  // stage widths for DW = 12: 6, 3, 2, 1
  logic [5:0] s1;
  logic [2:0] s2;
  logic [1:0] s3;
  logic [11:0] pad;

  always_comb begin
    pad = '0;
    pad[DW-1:0] = sas;
    for (int i = 0; i < 6; i++) s1[i] = pad[2*i] | pad[2*i+1];
    for (int i = 0; i < 3; i++) s2[i] = s1[2*i] | s1[2*i+1];
    s3[0] = s2[0] | s2[1];
    s3[1] = s2[2];
    bit_o = s3[0] | s3[1];
  end

  initial assert (DW <= 12) else $error("psxu_big: OR tree is sized for at most 12 bits");
endmodule
