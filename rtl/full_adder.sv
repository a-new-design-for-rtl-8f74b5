// full_adder -- one-bit full adder, the cell of the multiplier array.
//
// Adds three bits of equal weight and returns a sum bit of the same weight
// and a carry bit of twice that weight:
//   sum  = a ^ b ^ cin
//   cout = majority(a, b, cin)
// Interface: three 1-bit inputs (a, b, cin), two 1-bit outputs (sum, cout).
// Timing: purely combinational, no clock and no state.
//
// The multiplier this cell belongs to was characterised with a 16-transistor
// CMOS full adder. The transistor circuit is a process-level matter and is
// not modelled here; this file gives the logic function only, written as the
// textbook sum-of-products, which any full-adder circuit must implement.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  always_comb begin
    sum  = a ^ b ^ cin;
    cout = (a & b) | (a & cin) | (b & cin);
  end

endmodule
