// tb_blackcell: exhaustive self-checking test of the black cell.
// The expected values come from the meaning of a group: the merged group
// generates a carry when the upper group generates one, or when the upper
// group passes one on and the lower group generates it; it passes a carry
// on only when both halves do. All 16 input combinations are checked.
// Prints one TB_RESULT line.
module tb_blackcell;
  logic g_ik, p_ik, g_kj, p_kj, g_ij, p_ij;
  int checks = 0, failures = 0;

  blackcell dut (.g_ik(g_ik), .p_ik(p_ik), .g_kj(g_kj), .p_kj(p_kj),
                 .g_ij(g_ij), .p_ij(p_ij));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic exp_g, exp_p;
      {g_ik, p_ik, g_kj, p_kj} = v[3:0];
      #1;
      if (g_ik)                exp_g = 1'b1;
      else if (p_ik && g_kj)   exp_g = 1'b1;
      else                     exp_g = 1'b0;
      exp_p = (p_ik && p_kj) ? 1'b1 : 1'b0;
      checks += 2;
      if (g_ij !== exp_g) begin
        failures++;
        $display("FAIL in=%04b: g_ij=%0b, expected %0b", v[3:0], g_ij, exp_g);
      end
      if (p_ij !== exp_p) begin
        failures++;
        $display("FAIL in=%04b: p_ij=%0b, expected %0b", v[3:0], p_ij, exp_p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
