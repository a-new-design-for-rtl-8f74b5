// tb_full_adder -- exhaustive self-check of the full-adder cell.
//
// Applies all eight input combinations and compares {cout, sum} with the
// integer sum a + b + cin. A watchdog ends the run with a failure if the
// stimulus never completes.
module tb_full_adder;

  logic a, b, cin, sum, cout;
  int   checks   = 0;
  int   failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #10_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int unsigned expected;
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      expected = 32'(a) + 32'(b) + 32'(cin);
      checks++;
      if ({cout, sum} != 2'(expected)) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d: got cout=%0d sum=%0d, want %0d",
                 a, b, cin, cout, sum, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
