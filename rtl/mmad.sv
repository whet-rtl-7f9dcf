// mmad: one modular multiply-add (MMAD) unit, y = (a*b + c) mod q.
//
// The element-wise engine of every vector lane holds four of these.  The
// paper gives the unit's function (modular multiply-add on 32-bit words,
// primes below 2^31) but not its insides; here the 64-bit product plus addend
// is reduced with Barrett reduction (whet_pkg::mod_reduce), which is this
// design's choice.  Inputs must satisfy a, b, c < q.
//
// Timing: one pipeline register.  When en is high the result of the inputs
// presented in that cycle appears on y in the next cycle; with en low y holds.
module mmad
  import whet_pkg::*;
(
  input  logic     clk,
  input  logic     en,
  input  modulus_t m,
  input  word_t    a,
  input  word_t    b,
  input  word_t    c,
  output word_t    y
);
  always_ff @(posedge clk) begin
    if (en) y <= mod_mad(a, b, c, m);
  end
endmodule
