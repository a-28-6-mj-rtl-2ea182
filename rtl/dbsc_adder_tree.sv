// dbsc_adder_tree: balanced binary adder tree, N signed inputs of IW bits
// summed into OW bits. Combinational; N must be a power of two. Used for
// the left and right adder trees of every DBSC PE column.
module dbsc_adder_tree #(
  parameter int unsigned N  = 16,
  parameter int unsigned IW = 15,
  parameter int unsigned OW = 20
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);
  localparam int unsigned LV = $clog2(N);
  // node[l][k]: k-th partial sum of level l (level 0 = inputs)
  logic signed [OW-1:0] node [LV+1][N];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int k = 0; k < N; k++) node[l][k] = '0;
    for (int k = 0; k < N; k++) node[0][k] = OW'(in[k]);
    for (int l = 1; l <= LV; l++)
      for (int k = 0; k < (N >> l); k++)
        node[l][k] = node[l-1][2*k] + node[l-1][2*k+1];
    sum = node[LV][0];
  end

  initial assert ((1 << LV) == N) else $error("dbsc_adder_tree: N must be a power of two");
endmodule
