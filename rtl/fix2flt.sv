// fix2flt: signed fixed point Q(W-F).F to IEEE-754 single precision.
//
// Combinational.  The magnitude is normalised by its leading one; values
// with up to 24 significant bits convert exactly, longer ones are rounded
// to nearest, ties to even (the rounding may carry into the exponent).
// Zero gives +0.  For the formats used here (W <= 32, F < W) the exponent
// never leaves the normal range.  The wrapper uses it to return results in
// floating point.  The converter is an option of the published wrapper;
// its rounding rule is this design's own.
module fix2flt
  import thomas_pkg::*;
#(
  parameter int unsigned W = DEF_W,
  parameter int unsigned F = DEF_F
) (
  input  logic signed [W-1:0] x,
  output logic [FLT_W-1:0]    f
);
  initial assert (W <= 32 && W >= 2) else $fatal(1, "fix2flt: W must be 2..32");

  logic          s;
  logic [W-1:0]  mag;
  int            p;
  logic [W+23:0] norm;     // magnitude with its leading one moved to bit W+23
  logic [24:0]   keep;     // leading one + 23 mantissa bits, plus carry
  logic          rnd, sticky;
  int            ex;

  always_comb begin
    s   = x[W-1];
    mag = s ? W'(-x) : W'(x);
    p   = 0;
    for (int i = 0; i < W; i++) if (mag[i]) p = i;
    norm   = (W+24)'(mag) << (W - 1 - p + 24);
    keep   = {1'b0, norm[W+23:W]};
    rnd    = norm[W-1];
    sticky = |norm[W-2:0];
    if (rnd && (sticky || keep[0])) keep = keep + 1'b1;
    ex = p - int'(F) + 127;
    if (keep[24]) begin
      keep = keep >> 1;
      ex   = ex + 1;
    end
    if (mag == '0) f = '0;
    else           f = {s, ex[7:0], keep[22:0]};
  end
endmodule
