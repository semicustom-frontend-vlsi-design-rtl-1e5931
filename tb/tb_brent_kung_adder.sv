// tb_brent_kung_adder: end-to-end self-checking test of the 32-bit
// Brent-Kung adder at its default width.
//
// It first replays the seven published test vectors at the published
// times (0, 10, 30, 50, 70, 90 and 110 ns): 0+0, 1+1, 4294967295+1,
// 2147483648+2147483648, 0+0, 10+20 and 15+1 with carry-in, and checks the
// published sums and carry-outs. It then applies directed corner cases and
// random operands, comparing {Co, S} with A + B + Ci worked out by the
// simulator's own arithmetic. Each adder mechanism is counted and must
// occur at least once: a carry-out (overflow), a carry-in that changes the
// result, a carry that travels from bit 0 to the carry-out through every
// bit, and the all-zero addition. Prints one TB_RESULT line.
// Delays are in units of 1 ns (compile with a 1ns/1ps timescale).
module tb_brent_kung_adder;

  localparam int W = 32;

  logic [W-1:0] A, B, S;
  logic         Ci, Co;
  int checks = 0, failures = 0;
  int n_overflow = 0, n_carry_in = 0, n_full_chain = 0, n_zero = 0;

  brent_kung_adder dut (.A(A), .B(B), .Ci(Ci), .S(S), .Co(Co));

  // Reference, evaluated outside the stimulus process.
  logic [W:0] expected;
  always_comb expected = {1'b0, A} + {1'b0, B} + {{W{1'b0}}, Ci};

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Compare against the reference and count the mechanisms seen.
  task automatic check(string what);
    checks++;
    if ({Co, S} !== expected) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %0d + %0d + %0d gave S=%0d Co=%0b, expected S=%0d Co=%0b",
                 what, A, B, Ci, S, Co, expected[W-1:0], expected[W]);
    end
    if (Co) n_overflow++;
    if (Ci && (A + B) != S) n_carry_in++;
    if (A == '1 && B == '0 && Ci) n_full_chain++;
    if (A == '0 && B == '0 && !Ci) n_zero++;
  endtask

  // The published vectors: operands, expected sum and carry-out, and the
  // time at which each was applied.
  typedef struct {
    logic [W-1:0] a, b;
    logic         ci;
    logic [W-1:0] sum;
    logic         co;
    int           t_ns;
  } vec_t;

  vec_t table1 [7] = '{
    '{32'd0,          32'd0,          1'b0, 32'd0,  1'b0,   0},
    '{32'd1,          32'd1,          1'b0, 32'd2,  1'b0,  10},
    '{32'd4294967295, 32'd1,          1'b0, 32'd0,  1'b1,  30},
    '{32'd2147483648, 32'd2147483648, 1'b0, 32'd0,  1'b1,  50},
    '{32'd0,          32'd0,          1'b0, 32'd0,  1'b0,  70},
    '{32'd10,         32'd20,         1'b0, 32'd30, 1'b0,  90},
    '{32'd15,         32'd1,          1'b1, 32'd17, 1'b0, 110}
  };

  initial begin
    A = '0; B = '0; Ci = 1'b0;

    // Published vectors at the published times.
    for (int k = 0; k < 7; k++) begin
      while ($time < 64'(table1[k].t_ns)) #1;
      A = table1[k].a; B = table1[k].b; Ci = table1[k].ci;
      #1;
      checks++;
      if (S !== table1[k].sum || Co !== table1[k].co) begin
        failures++;
        $display("FAIL test %0d: S=%0d Co=%0b, published S=%0d Co=%0b",
                 k + 1, S, Co, table1[k].sum, table1[k].co);
      end
      check($sformatf("test %0d", k + 1));
    end

    // Directed corners: longest carry chains and alternating patterns.
    #10;
    A = '1;            B = '0;            Ci = 1'b1; #1; check("all-ones + carry-in");
    A = '1;            B = '1;            Ci = 1'b1; #1; check("all-ones + all-ones + 1");
    A = '1;            B = '1;            Ci = 1'b0; #1; check("all-ones + all-ones");
    A = 32'h5555_5555; B = 32'hAAAA_AAAA; Ci = 1'b1; #1; check("alternating + carry-in");
    A = 32'h7FFF_FFFF; B = 32'd1;         Ci = 1'b0; #1; check("into the top bit");
    A = 32'h0000_FFFF; B = 32'h0000_0001; Ci = 1'b0; #1; check("16-bit boundary");
    A = 32'h00FF_FFFF; B = 32'h0000_0000; Ci = 1'b1; #1; check("24-bit chain");

    // Every single-bit generate with propagates above it.
    for (int i = 0; i < W; i++) begin
      A = '1 << i; B = 32'd1 << i; Ci = 1'b0; #1; check("generate at bit i");
    end

    // Random operands.
    for (int n = 0; n < 100000; n++) begin
      A = $urandom; B = $urandom; Ci = 1'($urandom);
      #1; check("random");
    end

    $display("mechanisms: overflow=%0d carry_in=%0d full_chain=%0d zero=%0d",
             n_overflow, n_carry_in, n_full_chain, n_zero);
    if (n_overflow == 0)   begin failures++; $display("FAIL no carry-out seen"); end
    if (n_carry_in == 0)   begin failures++; $display("FAIL no carry-in effect seen"); end
    if (n_full_chain == 0) begin failures++; $display("FAIL no full carry chain seen"); end
    if (n_zero == 0)       begin failures++; $display("FAIL no zero addition seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
