// tram_ha -- half adder, the two-input compressor cell of the array
// multiplier. s is the modulo-2 sum of a and b, c the carry into the next
// more significant column: a + b = 2*c + s. Purely combinational, no clock.
module tram_ha (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  always_comb begin
    {c, s} = 2'(a) + 2'(b);
  end
endmodule
