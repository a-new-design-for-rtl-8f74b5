// tb_csa_array -- self-check of the carry-save array on its own.
//
// The array adds any N x N matrix of bits, each bit pp[i][j] weighted
// 2^(i+j), not only matrices that come from AND gates. The testbench uses
// that: the 4 x 4 array is driven with all 65536 bit matrices, a 3 x 3
// array with all 512, and an 8 x 8 array with 5000 random matrices. The
// expected output is the weighted sum, computed here with integer
// arithmetic.
module tb_csa_array;

  logic [3:0][3:0] pp4;
  logic [7:0]      p4;
  logic [2:0][2:0] pp3;
  logic [5:0]      p3;
  logic [7:0][7:0] pp8;
  logic [15:0]     p8;
  int checks   = 0;
  int failures = 0;

  csa_array          dut4 (.pp(pp4), .p(p4));
  csa_array #(.N(3)) dut3 (.pp(pp3), .p(p3));
  csa_array #(.N(8)) dut8 (.pp(pp8), .p(p8));

  function automatic longint unsigned weighted_sum(input logic [63:0] bits, input int n);
    longint unsigned acc = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++)
        if (bits[i*n+j]) acc += longint'(1) << (i + j);
    return acc;
  endfunction

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    longint unsigned want;
    for (int v = 0; v < 65536; v++) begin
      pp4 = 16'(v);
      #1;
      want = weighted_sum(64'(pp4), 4);
      checks++;
      if (64'(p4) != want) begin
        failures++;
        if (failures < 20) $display("FAIL N=4 pp=%h p=%0d want %0d", pp4, p4, want);
      end
    end
    for (int v = 0; v < 512; v++) begin
      pp3 = 9'(v);
      #1;
      want = weighted_sum(64'(pp3), 3);
      checks++;
      if (64'(p3) != want) begin
        failures++;
        if (failures < 20) $display("FAIL N=3 pp=%h p=%0d want %0d", pp3, p3, want);
      end
    end
    for (int v = 0; v < 5000; v++) begin
      pp8 = {$urandom, $urandom};
      #1;
      want = weighted_sum(64'(pp8), 8);
      checks++;
      if (64'(p8) != want) begin
        failures++;
        if (failures < 20) $display("FAIL N=8 pp=%h p=%0d want %0d", pp8, p8, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
