// tb_preprocessing: exhaustive self-checking test of the pre-processing cell.
// For every (a, b) the pair {g, p} must equal the two-bit sum a + b,
// since a one-bit addition carries exactly when both bits are set and its
// sum bit is their XOR. Prints one TB_RESULT line.
module tb_preprocessing;
  logic a, b, g, p;
  int checks = 0, failures = 0;

  preprocessing dut (.a(a), .b(b), .g(g), .p(p));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      logic [1:0] sum;
      {a, b} = v[1:0];
      #1;
      sum = 2'(a) + 2'(b);
      checks++;
      if ({g, p} !== sum) begin
        failures++;
        $display("FAIL a=%0b b=%0b: g=%0b p=%0b, expected %02b", a, b, g, p, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
