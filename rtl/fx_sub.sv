// fx_sub: pipelined saturating two's complement subtractor, r = a - b.
//
// The W+1-bit difference is clamped to the W-bit range and delayed so that
// it appears LAT cycles after the operands (default 2, the published
// subtractor latency of the fixed-point solver).  Saturation is this
// design's choice; with the coefficient bounds the solver is meant to be
// used under, no value reaches the limits.
module fx_sub
  import thomas_pkg::*;
#(
  parameter int unsigned W   = DEF_W,
  parameter int unsigned LAT = DEF_SUB_LAT
) (
  input  logic                clk,
  input  logic                en,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] r
);
  initial assert (LAT >= 1) else $fatal(1, "fx_sub: LAT must be >= 1");

  logic signed [W:0]   diff;
  logic signed [W-1:0] sat;
  always_comb begin
    diff = (W+1)'(a) - (W+1)'(b);
    if (diff[W] != diff[W-1]) sat = diff[W] ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
    else                      sat = diff[W-1:0];
  end

  delay_line #(.WIDTH(W), .LAT(LAT)) u_pipe (
    .clk(clk), .en(en), .d(sat), .q(r)
  );
endmodule
