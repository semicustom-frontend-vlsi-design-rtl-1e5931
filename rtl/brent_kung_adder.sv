// brent_kung_adder: a WIDTH-bit (default 32) Brent-Kung parallel-prefix
// adder, S + 2**WIDTH * Co = A + B + Ci.
//
// It is built from three stages, each from its own cell modules:
//   1. pre-processing: one preprocessing cell per bit gives g = A&B, p = A^B;
//   2. carry generation: bk_prefix_tree merges the (g, p) pairs and the
//      carry-in with black and gray cells in a Brent-Kung network and
//      returns the carry into every bit and the carry-out;
//   3. post-processing: one postprocessing cell per bit gives S = p ^ carry.
// The module, port and instance names (A, B, Ci, S, Co; preprocessing_stage,
// postprocessing_stage) follow the published design. The carry network is
// the logarithmic Brent-Kung tree of the published schematic; see
// bk_prefix_tree for how it is laid out.
//
// Interface: A, B (WIDTH bits), Ci; outputs S (WIDTH bits), Co.
// Purely combinational: no clock, no reset, no registers. The longest
// path is one pre-processing gate, 2*floor(log2(WIDTH+1)) prefix cells
// (10 for 32 bits) and one XOR.
module brent_kung_adder
  import bk_pkg::*;
#(
  parameter int unsigned WIDTH = BK_WIDTH
) (
  input  logic [WIDTH-1:0] A,
  input  logic [WIDTH-1:0] B,
  input  logic             Ci,
  output logic [WIDTH-1:0] S,
  output logic             Co
);

  logic [WIDTH-1:0] g;
  logic [WIDTH-1:0] p;
  logic [WIDTH:0]   carry;   // carry[i] is the carry into bit i

  for (genvar i = 0; i < WIDTH; i++) begin : preprocessing_stage
    preprocessing pp (
      .a (A[i]),
      .b (B[i]),
      .g (g[i]),
      .p (p[i])
    );
  end

  bk_prefix_tree #(
    .WIDTH (WIDTH)
  ) carry_tree (
    .g_in (g),
    .p_in (p),
    .cin  (Ci),
    .c    (carry)
  );

  for (genvar i = 0; i < WIDTH; i++) begin : postprocessing_stage
    postprocessing pp (
      .c (carry[i]),
      .p (p[i]),
      .s (S[i])
    );
  end

  assign Co = carry[WIDTH];

endmodule
