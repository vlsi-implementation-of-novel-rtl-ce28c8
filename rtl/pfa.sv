// pfa -- partial full adder, one bit slice of the carry look-ahead adder.
//
// Each slice adds a, b and the carry c produced for it by the look-ahead
// logic, and hands the bit propagate p and generate g to that logic instead
// of producing a carry of its own. Purely combinational.
//
// The slice name and its p/g/c/s pins are those of the 8-bit adder diagram.
// The paper does not give the slice's gates; this design uses the usual
// p = a xor b (so the sum is p xor c) and g = a and b.
module pfa (
  input  logic a,
  input  logic b,
  input  logic c,  // carry into this bit, from the look-ahead logic
  output logic s,  // sum bit
  output logic p,  // bit propagate
  output logic g   // bit generate
);
  always_comb begin
    p = a ^ b;
    g = a & b;
    s = p ^ c;
  end
endmodule
