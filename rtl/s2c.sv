// s2c: sign-magnitude to two's-complement converter (the "S2C" block).
//
// Input: a W-bit sign-magnitude word (bit W-1 is the sign, the rest the
// magnitude). Output: the same value as a W-bit two's-complement number.
// Negative zero maps to zero. Purely combinational.
module s2c #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] sm,
  output logic [W-1:0] tc
);
  logic [W-1:0] mag;
  assign mag = {1'b0, sm[W-2:0]};
  assign tc  = sm[W-1] ? (~mag + 1'b1) : mag;
endmodule
