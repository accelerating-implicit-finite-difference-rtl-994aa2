// flt2fix: IEEE-754 single precision to signed fixed point Q(W-F).F.
//
// Combinational.  The 24-bit significand is shifted by the unbiased
// exponent plus F and rounded to nearest, ties away from zero; the sign is
// then applied in two's complement.  Results beyond +/-(2^(W-1)-1) LSBs
// saturate, as do infinities and NaNs (by sign); zeros and subnormals give
// 0.  The wrapper places one of these on each of a, b, c and y so the host
// can work in floating point.  The converter is an option of the published
// wrapper; its rounding and saturation rules are this design's own.
module flt2fix
  import thomas_pkg::*;
#(
  parameter int unsigned W = DEF_W,
  parameter int unsigned F = DEF_F
) (
  input  logic [FLT_W-1:0]    f,
  output logic signed [W-1:0] x
);
  initial assert (W <= 40) else $fatal(1, "flt2fix: W above 40 not supported");

  localparam logic [63:0] MAXMAG = (64'(1) << (W-1)) - 1;

  logic        s;
  logic [7:0]  e;
  logic [23:0] m;
  int          sh;
  logic [63:0] mag;

  always_comb begin
    s   = f[31];
    e   = f[30:23];
    m   = {1'b1, f[22:0]};
    sh  = int'(e) - 150 + int'(F);       // value * 2^F = m * 2^sh
    mag = '0;
    if (e == 8'd0) begin
      mag = '0;
    end else if (e == 8'hFF) begin
      mag = MAXMAG;
    end else if (sh >= 0) begin
      mag = (sh > 40) ? MAXMAG : (64'(m) << sh);
    end else if (sh > -25) begin
      mag = (64'(m) + (64'(1) << (-sh - 1))) >> (-sh);
    end
    if (mag > MAXMAG) mag = MAXMAG;
    x = s ? -$signed(W'(mag)) : $signed(W'(mag));
  end
endmodule
