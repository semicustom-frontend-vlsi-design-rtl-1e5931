// tb_postprocessing: exhaustive self-checking test of the sum cell.
// The sum bit is the low bit of c + p. Prints one TB_RESULT line.
module tb_postprocessing;
  logic c, p, s;
  int checks = 0, failures = 0;

  postprocessing dut (.c(c), .p(p), .s(s));

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
      {c, p} = v[1:0];
      #1;
      sum = 2'(c) + 2'(p);
      checks++;
      if (s !== sum[0]) begin
        failures++;
        $display("FAIL c=%0b p=%0b: s=%0b, expected %0b", c, p, s, sum[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
