// tb_graycell: exhaustive self-checking test of the gray cell.
// The carry out of the upper group is set when the group generates one,
// or when it passes on the carry that arrives from below (g_im1).
// All 8 input combinations are checked. Prints one TB_RESULT line.
module tb_graycell;
  logic g_i, p_i, g_im1, c;
  int checks = 0, failures = 0;

  graycell dut (.g_i(g_i), .p_i(p_i), .g_im1(g_im1), .c(c));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic exp_c;
      {g_i, p_i, g_im1} = v[2:0];
      #1;
      if (g_i)                exp_c = 1'b1;
      else if (p_i && g_im1)  exp_c = 1'b1;
      else                    exp_c = 1'b0;
      checks++;
      if (c !== exp_c) begin
        failures++;
        $display("FAIL in=%03b: c=%0b, expected %0b", v[2:0], c, exp_c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
