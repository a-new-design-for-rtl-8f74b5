// tb_pp_gen -- self-check of the partial-product generator.
//
// The default 4 x 4 instance is driven with all 256 operand pairs; an 8 x 8
// instance with 2000 random pairs. Every partial-product bit is compared
// with the bit-wise product of the operand bits, computed here by shifting.
module tb_pp_gen;

  localparam int unsigned NB = 8;

  logic [3:0]           x4, y4;
  logic [3:0][3:0]      pp4;
  logic [NB-1:0]        x8, y8;
  logic [NB-1:0][NB-1:0] pp8;
  int checks   = 0;
  int failures = 0;

  pp_gen       dut4 (.x(x4), .y(y4), .pp(pp4));
  pp_gen #(.N(NB)) dut8 (.x(x8), .y(y8), .pp(pp8));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    logic want;
    for (int v = 0; v < 256; v++) begin
      x4 = 4'(v >> 4);
      y4 = 4'(v);
      #1;
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < 4; j++) begin
          want = ((x4 >> i) & (y4 >> j) & 4'd1) != 0;
          checks++;
          if (pp4[i][j] != want) begin
            failures++;
            $display("FAIL N=4 x=%h y=%h pp[%0d][%0d]=%0d", x4, y4, i, j, pp4[i][j]);
          end
        end
      end
    end
    for (int v = 0; v < 2000; v++) begin
      x8 = NB'($urandom);
      y8 = NB'($urandom);
      #1;
      for (int i = 0; i < NB; i++) begin
        for (int j = 0; j < NB; j++) begin
          want = ((x8 >> i) & (y8 >> j) & NB'(1)) != 0;
          checks++;
          if (pp8[i][j] != want) begin
            failures++;
            $display("FAIL N=8 x=%h y=%h pp[%0d][%0d]=%0d", x8, y8, i, j, pp8[i][j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
