// graycell: the gray cell of the Brent-Kung prefix network.
//
// It is a black cell without the propagate half: c = g_i | (p_i & g_im1),
// where g_i, p_i belong to an upper bit group and g_im1 (g sub i-1) is the
// generate of the group just below it, which reaches down to the carry-in
// column. The result is therefore the carry out of the upper group's top
// bit, and no group propagate is needed any more. Purely combinational,
// an AND-OR, two gate levels. Ports are named after the published
// description of the cell (g_im1 stands for g_{i-1}).
module graycell (
  input  logic g_i,
  input  logic p_i,
  input  logic g_im1,
  output logic c
);

  assign c = g_i | (p_i & g_im1);

endmodule
