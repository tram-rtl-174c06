// tram_fa -- full adder, the three-input compressor cell of the array
// multiplier. s is the modulo-2 sum of a, b and ci; co the carry into the
// next more significant column: a + b + ci = 2*co + s. Combinational.
module tram_fa (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  always_comb begin
    {co, s} = 2'(a) + 2'(b) + 2'(ci);
  end
endmodule
