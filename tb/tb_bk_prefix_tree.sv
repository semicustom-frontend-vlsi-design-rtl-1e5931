// tb_bk_prefix_tree: self-checking test of the Brent-Kung carry network.
// The default 32-bit network gets directed and random vectors; networks of
// 1, 2, 3, 4 and 5 bits are checked exhaustively, and 7, 16 and 33 bits
// randomly, to cover widths that are not one less than a power of two.
// Every carry is compared with a bit-serial reference. Prints one
// TB_RESULT line.
module tb_bk_prefix_tree;
  localparam int NCHK = 9;
  int   chk  [NCHK];
  int   fail [NCHK];
  logic done [NCHK];
  int   checks = 0, failures = 0;

  tb_prefix_checker #(.WIDTH(32), .EXHAUSTIVE(1'b0), .NRAND(30000)) u_w32 (chk[0], fail[0], done[0]);
  tb_prefix_checker #(.WIDTH(1))                                    u_w1  (chk[1], fail[1], done[1]);
  tb_prefix_checker #(.WIDTH(2))                                    u_w2  (chk[2], fail[2], done[2]);
  tb_prefix_checker #(.WIDTH(3))                                    u_w3  (chk[3], fail[3], done[3]);
  tb_prefix_checker #(.WIDTH(4))                                    u_w4  (chk[4], fail[4], done[4]);
  tb_prefix_checker #(.WIDTH(5))                                    u_w5  (chk[5], fail[5], done[5]);
  tb_prefix_checker #(.WIDTH(7),  .EXHAUSTIVE(1'b0), .NRAND(5000))  u_w7  (chk[6], fail[6], done[6]);
  tb_prefix_checker #(.WIDTH(16), .EXHAUSTIVE(1'b0), .NRAND(10000)) u_w16 (chk[7], fail[7], done[7]);
  tb_prefix_checker #(.WIDTH(33), .EXHAUSTIVE(1'b0), .NRAND(10000)) u_w33 (chk[8], fail[8], done[8]);

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #0;
    for (int k = 0; k < NCHK; k++) wait (done[k] === 1'b1);
    for (int k = 0; k < NCHK; k++) begin
      checks   += chk[k];
      failures += fail[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
