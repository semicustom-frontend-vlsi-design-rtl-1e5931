// bk_prefix_tree: the Brent-Kung carry network (prefix carry tree) of the
// adder.
//
// What it does: from the per-bit generate/propagate pairs of the operands
// and the carry-in it computes every carry of the addition, c[i] being the
// carry into bit i (c[0] is the carry-in itself, c[WIDTH] the carry-out).
//
// How it works: the network has WIDTH+1 columns. Column 0 carries the
// carry-in as its generate; column i (1..WIDTH) carries bit i-1's g and p.
// The carry into bit i is then the group generate of columns i:0, which
// is what the network leaves in column i: c[i] = G[i:0], and the
// carry-out is G[WIDTH:0].
//   * Up-sweep, levels l = 1..UP: column i with (i+1) a multiple of 2**l
//     merges its group with the group of the 2**(l-1) columns below it,
//     doubling the group to 2**l columns (31:30, 31:28, 31:24, 31:16, 31:0
//     for column 31 of a 32-bit adder).
//   * Down-sweep, levels l = UP..1: column i = k*2**l + 2**(l-1) - 1, k >= 1,
//     merges its 2**(l-1)-column group with the complete prefix already
//     held by column k*2**l - 1 (23:0, then 27:0 19:0 11:0, then the odd
//     29:0..5:0 pattern, finally every even column 32:0..2:0).
// A merge whose lower group reaches column 0 only needs the generate and is
// a gray cell; all other merges are black cells. Every column from 1 to
// WIDTH gets exactly one gray cell (32 for WIDTH = 32, plus 26 black cells).
// A column that is not merged at a level is passed on as a wire; the
// buffer (white) cells of the drawn schematic only balance delay and are
// not modelled. The network has 2*UP stages, UP = floor(log2(WIDTH+1));
// the first down-sweep stage is empty for WIDTH = 2**k, and the longest
// chain of cells is 8 for WIDTH = 32 (2*UP - 2), against 32 for a ripple
// of gray cells.
//
// The placement of the cells follows the published 32-bit schematic
// exactly; generalising it to any WIDTH by the rules above is this RTL's
// own. The schematic marks alternate rows as AOI/OAI, a transistor-level
// choice of inverting gates that is logically the same and not modelled.
//
// Interface: g_in, p_in (WIDTH bits), cin; output c (WIDTH+1 bits).
// Purely combinational, no clock.
module bk_prefix_tree
  import bk_pkg::*;
#(
  parameter int unsigned WIDTH = BK_WIDTH
) (
  input  logic [WIDTH-1:0] g_in,
  input  logic [WIDTH-1:0] p_in,
  input  logic             cin,
  output logic [WIDTH:0]   c
);

  localparam int unsigned N      = WIDTH;
  localparam int unsigned UP     = bk_up_levels(WIDTH);
  localparam int unsigned STAGES = 2 * UP;

  // Group generate/propagate held by every column after each stage.
  // Stage 0 is the network input. A column's propagate is no longer
  // meaningful once a gray cell has merged it with column 0; it is never
  // read after that.
  logic [N:0] g_st [STAGES+1];
  logic [N:0] p_st [STAGES+1];

  assign g_st[0] = {g_in, cin};
  assign p_st[0] = {p_in, 1'b0};

  for (genvar s = 1; s <= STAGES; s++) begin : g_stage
    localparam bit          DOWN = (s > UP);
    localparam int unsigned LVL  = DOWN ? (2 * UP + 1 - s) : s;
    localparam int unsigned SPAN = 1 << LVL;
    localparam int unsigned HALF = SPAN / 2;

    for (genvar i = 0; i <= N; i++) begin : g_col
      localparam bit ACTIVE = DOWN ? (((i + 1) % SPAN) == HALF && i >= SPAN)
                                   : (((i + 1) % SPAN) == 0);
      localparam int unsigned LO   = ACTIVE ? (i - HALF) : 0;
      localparam bit          GRAY = DOWN || (i + 1 == SPAN);

      if (ACTIVE && GRAY) begin : g_gray
        graycell u_gc (
          .g_i   (g_st[s-1][i]),
          .p_i   (p_st[s-1][i]),
          .g_im1 (g_st[s-1][LO]),
          .c     (g_st[s][i])
        );
        assign p_st[s][i] = p_st[s-1][i];
      end else if (ACTIVE) begin : g_black
        blackcell u_bc (
          .g_ik (g_st[s-1][i]),
          .p_ik (p_st[s-1][i]),
          .g_kj (g_st[s-1][LO]),
          .p_kj (p_st[s-1][LO]),
          .g_ij (g_st[s][i]),
          .p_ij (p_st[s][i])
        );
      end else begin : g_wire
        assign g_st[s][i] = g_st[s-1][i];
        assign p_st[s][i] = p_st[s-1][i];
      end
    end
  end

  assign c = g_st[STAGES];

endmodule
