// bk_pkg: constants shared by the Brent-Kung adder and its prefix network.
//
// BK_WIDTH is the operand width of the adder, 32 bits as in the design this
// RTL implements. bk_up_levels() gives the number of up-sweep (reduction)
// levels of a Brent-Kung network over WIDTH+1 columns, where column 0 holds
// the carry-in: the largest L with 2**L <= WIDTH+1. The down-sweep
// (distribution) uses the same number of levels, so the carry network is
// 2*bk_up_levels(WIDTH) cell levels deep at most, logarithmic in WIDTH.
package bk_pkg;

  localparam int unsigned BK_WIDTH = 32;

  function automatic int unsigned bk_up_levels(int unsigned width);
    return $clog2(width + 2) - 1;
  endfunction

endpackage
