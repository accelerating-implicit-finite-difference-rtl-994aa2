// fx_mul: pipelined signed fixed-point multiplier, p = (a * b) >> F.
//
// W-bit two's complement operands with F fractional bits.  The full 2W-bit
// product is shifted right arithmetically by F (truncation toward minus
// infinity) and saturated to W bits.  The result is registered and then
// delayed so that it appears LAT cycles after the operands (default 6, the
// published multiplier latency of the fixed-point solver).  A synthesis
// tool is expected to retime these registers into the DSP multiplier; the
// published design used a vendor multiplier core, so the rounding and
// saturation behaviour here is this design's own choice.
module fx_mul
  import thomas_pkg::*;
#(
  parameter int unsigned W   = DEF_W,
  parameter int unsigned F   = DEF_F,
  parameter int unsigned LAT = DEF_MUL_LAT
) (
  input  logic                clk,
  input  logic                en,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] p
);
  initial assert (LAT >= 1) else $fatal(1, "fx_mul: LAT must be >= 1");

  localparam logic signed [2*W-1:0] PMAX = (2*W)'((64'(1) << (W-1)) - 1);
  localparam logic signed [2*W-1:0] PMIN = -PMAX - 1;

  logic signed [2*W-1:0] prod, shifted;
  logic signed [W-1:0]   sat;
  always_comb begin
    prod    = (2*W)'(a) * (2*W)'(b);
    shifted = prod >>> F;
    if (shifted > PMAX)      sat = PMAX[W-1:0];
    else if (shifted < PMIN) sat = PMIN[W-1:0];
    else                     sat = shifted[W-1:0];
  end

  delay_line #(.WIDTH(W), .LAT(LAT)) u_pipe (
    .clk(clk), .en(en), .d(sat), .q(p)
  );
endmodule
