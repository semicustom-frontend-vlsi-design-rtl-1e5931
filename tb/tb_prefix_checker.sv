// tb_prefix_checker: test helper that drives one bk_prefix_tree of a given
// WIDTH and compares its carry vector with a bit-serial reference,
// c[0] = cin, c[i+1] = g[i] | (p[i] & c[i]), computed in the testbench.
// With EXHAUSTIVE set it walks every combination of g, p and cin
// (2**(2*WIDTH+1) vectors, for small widths only); otherwise it applies
// NRAND random vectors, a third of them with g and p taken from random
// operands (g = a&b, p = a^b, never both set) and the rest with g and p
// independent, plus the all-propagate vectors that make a carry-in run
// through every column. It raises done when finished; checks counts the
// compared carry vectors and failures the mismatches.
module tb_prefix_checker #(
  parameter int unsigned WIDTH      = 4,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned NRAND      = 1000
) (
  output int   checks,
  output int   failures,
  output logic done
);
  logic [WIDTH-1:0] g_in, p_in;
  logic             cin;
  logic [WIDTH:0]   c;

  bk_prefix_tree #(.WIDTH(WIDTH)) dut (.g_in(g_in), .p_in(p_in), .cin(cin), .c(c));

  function automatic logic [WIDTH:0] ref_carry(logic [WIDTH-1:0] g, logic [WIDTH-1:0] p,
                                               logic ci);
    logic [WIDTH:0] r;
    r[0] = ci;
    for (int i = 0; i < WIDTH; i++) r[i+1] = g[i] | (p[i] & r[i]);
    return r;
  endfunction

  function automatic logic [WIDTH-1:0] rand_word();
    return WIDTH'({$urandom, $urandom});
  endfunction

  // The reference is evaluated outside the stimulus process.
  logic [WIDTH:0] exp_c;
  always_comb exp_c = ref_carry(g_in, p_in, cin);

  // Vector number n: exhaustive count, or directed then random vectors.
  localparam longint NVEC = EXHAUSTIVE ? (longint'(1) << (2 * WIDTH + 1)) : longint'(NRAND) + 3;

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    for (longint n = 0; n < NVEC; n++) begin
      if (EXHAUSTIVE) begin
        longint v;
        v = n;
        cin  = v[0];
        p_in = WIDTH'(v >> 1);
        g_in = WIDTH'(v >> (WIDTH + 1));
      end else if (n == 0) begin       // carry-in runs through every column
        g_in = '0; p_in = '1; cin = 1'b1;
      end else if (n == 1) begin
        g_in = '0; p_in = '1; cin = 1'b0;
      end else if (n == 2) begin       // generated at the bottom, runs to the top
        g_in = WIDTH'(1); p_in = '1; cin = 1'b0;
      end else if (n % 3 == 0) begin   // from real operands: g = a&b, p = a^b
        logic [WIDTH-1:0] a, b;
        a = rand_word(); b = rand_word();
        g_in = a & b; p_in = a ^ b; cin = 1'($urandom);
      end else begin                   // g and p independent
        g_in = rand_word(); p_in = rand_word(); cin = 1'($urandom);
      end
      #1;
      checks++;
      if (c !== exp_c) begin
        failures++;
        if (failures < 10)
          $display("FAIL W=%0d g=%h p=%h cin=%0b: c=%h expected %h", WIDTH, g_in, p_in, cin, c, exp_c);
      end
    end
    done = 1'b1;
  end
endmodule
