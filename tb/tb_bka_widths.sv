// tb_bka_widths: checks the adder at widths other than the default 32.
// The 4-bit adder (the size of the small gate-level prototype of this
// design) and the 8-bit adder are checked exhaustively; 16 bits (the size
// of the textbook Brent-Kung drawing), 13 and 64 bits with random operands.
// Prints one TB_RESULT line.
module tb_bka_widths;
  localparam int NCHK = 5;
  int   chk  [NCHK];
  int   fail [NCHK];
  logic done [NCHK];
  int   checks = 0, failures = 0;

  tb_adder_checker #(.WIDTH(4))                                    u_w4  (chk[0], fail[0], done[0]);
  tb_adder_checker #(.WIDTH(8))                                    u_w8  (chk[1], fail[1], done[1]);
  tb_adder_checker #(.WIDTH(13), .EXHAUSTIVE(1'b0), .NRAND(20000)) u_w13 (chk[2], fail[2], done[2]);
  tb_adder_checker #(.WIDTH(16), .EXHAUSTIVE(1'b0), .NRAND(20000)) u_w16 (chk[3], fail[3], done[3]);
  tb_adder_checker #(.WIDTH(64), .EXHAUSTIVE(1'b0), .NRAND(20000)) u_w64 (chk[4], fail[4], done[4]);

  initial begin : watchdog
    #10_000_000;
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
