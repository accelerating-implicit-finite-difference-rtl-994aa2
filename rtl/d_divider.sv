// d_divider: the two parallel dividers between forward and backward sweep.
//
// The back substitution x_n = (z_n - c_n x_{n+1}) / d_n is rewritten as
// x_n = z_n/d_n - (c_n/d_n) x_{n+1}.  Both quotients depend only on
// forward-sweep results, so they are computed here, off the backward
// recurrence, by two dividers working in parallel on every finished row.
// The two results are what the stack array stores (two values per row
// instead of c, z and d).  Fully pipelined: one row per clock in, results
// and the row's id/last flag DIV_LAT cycles later.  This structure follows
// the published design; only the side-band handling is this design's.
module d_divider
  import thomas_pkg::*;
#(
  parameter int unsigned W       = DEF_W,
  parameter int unsigned F       = DEF_F,
  parameter int unsigned DIV_LAT = DEF_DIV_LAT,
  parameter int unsigned IDW     = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_d,
  input  logic signed [W-1:0] in_z,
  input  logic signed [W-1:0] in_c,
  input  logic [IDW-1:0]      in_id,
  input  logic                in_last,
  output logic                out_valid,
  output logic signed [W-1:0] out_cd,
  output logic signed [W-1:0] out_zd,
  output logic [IDW-1:0]      out_id,
  output logic                out_last
);
  fx_div #(.W(W), .F(F), .LAT(DIV_LAT)) u_div_c (.clk(clk), .en(1'b1), .n(in_c), .d(in_d), .q(out_cd));
  fx_div #(.W(W), .F(F), .LAT(DIV_LAT)) u_div_z (.clk(clk), .en(1'b1), .n(in_z), .d(in_d), .q(out_zd));

  valid_delay #(.LAT(DIV_LAT)) u_v (.clk(clk), .rst_n(rst_n), .en(1'b1), .d(in_valid), .q(out_valid));
  delay_line #(.WIDTH(IDW + 1), .LAT(DIV_LAT)) u_side (
    .clk(clk), .en(1'b1), .d({in_id, in_last}), .q({out_id, out_last})
  );
endmodule
