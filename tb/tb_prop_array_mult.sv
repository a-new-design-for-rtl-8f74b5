// tb_prop_array_mult -- end-to-end check of the multiplier at its default
// size (4 x 4).
//
// Applies all 256 operand pairs and compares the 8-bit product with x * y.
// It also watches the mechanism that replaces the final adder row: for
// each last-row carry that is fed back into a higher row (columns 3, 4 and
// 5 into columns 4, 5 and 6) and for the last carry that becomes p[7], it
// counts the operand pairs that make that carry 1. A mechanism that never
// fires means the stimulus did not exercise it and is counted as a failure.
module tb_prop_array_mult;

  localparam int unsigned N = 4;

  logic [N-1:0]   x, y;
  logic [2*N-1:0] p;
  int checks   = 0;
  int failures = 0;
  int fed_back [N-1];
  int msb_carry = 0;

  prop_array_mult dut (.x(x), .y(y), .p(p));

  initial begin : watchdog
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int unsigned want;
    foreach (fed_back[k]) fed_back[k] = 0;
    for (int v = 0; v < (1 << (2 * N)); v++) begin
      x = N'(v >> N);
      y = N'(v);
      #1;
      want = 32'(x) * 32'(y);
      checks++;
      if (32'(p) != want) begin
        failures++;
        $display("FAIL x=%0d y=%0d p=%0d want %0d", x, y, p, want);
      end
      for (int k = 0; k < N - 1; k++)
        if (dut.u_csa_array.co[N-1][k]) fed_back[k]++;
      if (dut.u_csa_array.co[N-1][N-1]) msb_carry++;
    end
    for (int k = 0; k < N - 1; k++) begin
      $display("carry of column %0d fed into column %0d: %0d times", N - 1 + k, N + k, fed_back[k]);
      checks++;
      if (fed_back[k] == 0) begin
        failures++;
        $display("FAIL feedback carry of column %0d never fired", N - 1 + k);
      end
    end
    $display("carry of column %0d taken as p[%0d]: %0d times", 2 * N - 2, 2 * N - 1, msb_carry);
    checks++;
    if (msb_carry == 0) begin
      failures++;
      $display("FAIL product MSB carry never fired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
