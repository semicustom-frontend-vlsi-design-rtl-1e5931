// blackcell: the black cell of the Brent-Kung prefix network.
//
// It merges two adjacent bit groups, an upper group i:k and the lower group
// k-1:j below it, into the group i:j:
//   g_ij = g_ik | (p_ik & g_kj)     (an AND-OR)
//   p_ij = p_ik & p_kj              (an AND)
// The group generates a carry if the upper part generates one, or if the
// upper part propagates a carry that the lower part generates. It is used
// where the merged group does not reach the carry-in column, so its
// propagate is still needed further down the tree. Purely combinational,
// two gate levels from g_kj to g_ij. Ports are named after the published
// description of the cell.
module blackcell (
  input  logic g_ik,
  input  logic p_ik,
  input  logic g_kj,
  input  logic p_kj,
  output logic g_ij,
  output logic p_ij
);

  assign g_ij = g_ik | (p_ik & g_kj);
  assign p_ij = p_ik & p_kj;

endmodule
