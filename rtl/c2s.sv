// c2s: two's-complement to sign-magnitude converter with saturation (the
// "C2S" block).
//
// Input: a WI-bit two's-complement number. Output: a WO-bit sign-magnitude
// word. Values whose magnitude exceeds 2^(WO-1)-1 are clipped to that
// magnitude; the clipping rule is this design's choice. Combinational.
module c2s #(
  parameter int unsigned WI = 9,
  parameter int unsigned WO = 8
) (
  input  logic [WI-1:0] tc,
  output logic [WO-1:0] sm
);
  localparam logic [WI-1:0] MAXMAG = WI'((1 << (WO - 1)) - 1);
  logic          neg;
  logic [WI-1:0] mag;
  assign neg = tc[WI-1];
  assign mag = neg ? (~tc + 1'b1) : tc;   // -2^(WI-1) stays large: clipped below
  always_comb begin
    if (neg && mag[WI-1]) sm = {1'b1, MAXMAG[WO-2:0]};
    else if (mag > MAXMAG) sm = {neg, MAXMAG[WO-2:0]};
    else sm = {neg, mag[WO-2:0]};
  end
endmodule
