// tb_mult_sizes -- the multiplier at other sizes than the default.
//
// The array routing is written for any N >= 2. This testbench checks the
// product exhaustively for N = 2, 3, 5, 6 and 8 (the last is 65536
// operand pairs) and with 20000 random pairs for N = 16.
module tb_mult_sizes;

  int checks   = 0;
  int failures = 0;

  logic [1:0]  x2, y2;   logic [3:0]  p2;
  logic [2:0]  x3, y3;   logic [5:0]  p3;
  logic [4:0]  x5, y5;   logic [9:0]  p5;
  logic [5:0]  x6, y6;   logic [11:0] p6;
  logic [7:0]  x8, y8;   logic [15:0] p8;
  logic [15:0] x16, y16; logic [31:0] p16;

  prop_array_mult #(.N(2))  d2  (.x(x2),  .y(y2),  .p(p2));
  prop_array_mult #(.N(3))  d3  (.x(x3),  .y(y3),  .p(p3));
  prop_array_mult #(.N(5))  d5  (.x(x5),  .y(y5),  .p(p5));
  prop_array_mult #(.N(6))  d6  (.x(x6),  .y(y6),  .p(p6));
  prop_array_mult #(.N(8))  d8  (.x(x8),  .y(y8),  .p(p8));
  prop_array_mult #(.N(16)) d16 (.x(x16), .y(y16), .p(p16));

  task automatic check(input int n, input longint unsigned a, input longint unsigned b,
                       input longint unsigned got);
    checks++;
    if (got != a * b) begin
      failures++;
      if (failures < 20) $display("FAIL N=%0d %0d * %0d gave %0d", n, a, b, got);
    end
  endtask

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    for (int v = 0; v < (1 << 16); v++) begin
      x2 = 2'(v >> 2);  y2 = 2'(v);
      x3 = 3'(v >> 3);  y3 = 3'(v);
      x5 = 5'(v >> 5);  y5 = 5'(v);
      x6 = 6'(v >> 6);  y6 = 6'(v);
      x8 = 8'(v >> 8);  y8 = 8'(v);
      x16 = 16'($urandom); y16 = 16'($urandom);
      #1;
      if (v < (1 << 4))  check(2, 64'(x2), 64'(y2), 64'(p2));
      if (v < (1 << 6))  check(3, 64'(x3), 64'(y3), 64'(p3));
      if (v < (1 << 10)) check(5, 64'(x5), 64'(y5), 64'(p5));
      if (v < (1 << 12)) check(6, 64'(x6), 64'(y6), 64'(p6));
      check(8, 64'(x8), 64'(y8), 64'(p8));
      if (v < 20000) check(16, 64'(x16), 64'(y16), 64'(p16));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
