// tb_adder_checker: test helper that drives one brent_kung_adder of a given
// WIDTH and compares {Co, S} with A + B + Ci computed by the simulator.
// With EXHAUSTIVE set it applies every (A, B, Ci), 2**(2*WIDTH+1) vectors,
// for small widths only; otherwise NRAND random vectors after the
// all-ones-plus-carry-in vector. Raises done when finished.
module tb_adder_checker #(
  parameter int unsigned WIDTH      = 4,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned NRAND      = 1000
) (
  output int   checks,
  output int   failures,
  output logic done
);
  logic [WIDTH-1:0] A, B, S;
  logic             Ci, Co;

  brent_kung_adder #(.WIDTH(WIDTH)) dut (.A(A), .B(B), .Ci(Ci), .S(S), .Co(Co));

  // Reference, evaluated outside the stimulus process.
  logic [WIDTH:0] expected;
  always_comb expected = {1'b0, A} + {1'b0, B} + {{WIDTH{1'b0}}, Ci};

  localparam longint NVEC = EXHAUSTIVE ? (longint'(1) << (2 * WIDTH + 1)) : longint'(NRAND) + 1;

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    for (longint n = 0; n < NVEC; n++) begin
      if (EXHAUSTIVE) begin
        Ci = n[0];
        A  = WIDTH'(n >> 1);
        B  = WIDTH'(n >> (WIDTH + 1));
      end else if (n == 0) begin
        A = '1; B = '0; Ci = 1'b1;
      end else begin
        A = WIDTH'({$urandom, $urandom});
        B = WIDTH'({$urandom, $urandom});
        Ci = 1'($urandom);
      end
      #1;
      checks++;
      if ({Co, S} !== expected) begin
        failures++;
        if (failures < 10)
          $display("FAIL W=%0d: %0d + %0d + %0d gave S=%0d Co=%0b", WIDTH, A, B, Ci, S, Co);
      end
    end
    done = 1'b1;
  end
endmodule
