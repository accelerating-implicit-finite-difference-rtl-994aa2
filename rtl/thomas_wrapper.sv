// thomas_wrapper: host-facing tridiagonal solver (top level).
//
// Puts the Thomas core between two FIFOs and two number format stages so a
// host processor can write rows and read results in single precision
// floating point, at its own pace:
//
//   in_* -> input FIFO -> float-to-fixed (a,b,c,y) -> register -> core
//   core -> fixed-to-float (x) -> register -> output FIFO -> out_*
//
// Input: one row per handshake (in_valid & in_ready): the four
// coefficients a_n, b_n, c_n, y_n as IEEE-754 single bit patterns, the
// system id (0..M_MAX-1) and in_last on the final row of a system.  Rows
// of one system must be written in order n = 0..N; a_0 and c_N are ignored.
// Output: one solution element per handshake: x_n as a float bit pattern,
// its system id and row index, rows of a system in the order N..0, with
// out_last on row 0.  Results of different systems may interleave.
// The host connection itself (in the published system, AXI links to an
// ARM processor) is outside this module.  Values must respect the
// Q(W-F).F range; the published coefficient bounds keep every
// intermediate value below 2 for Q2.F.  fwd_stall and bwd_q_wait show
// the two waits of the core and thread_busy the ids in use.
// The structure follows the published wrapper; the depths and the
// placement of the converters between FIFO and core are this design's.
// The fill levels of the two FIFOs (fi_count, fo_count) are not needed by
// the valid/ready handshakes and are left unused; lint reports them.
module thomas_wrapper
  import thomas_pkg::*;
#(
  parameter int unsigned W          = DEF_W,
  parameter int unsigned F          = DEF_F,
  parameter int unsigned M_MAX      = DEF_M_MAX,
  parameter int unsigned N_MAX      = DEF_N_MAX,
  parameter int unsigned DIV_LAT    = DEF_DIV_LAT,
  parameter int unsigned MUL_LAT    = DEF_MUL_LAT,
  parameter int unsigned SUB_LAT    = DEF_SUB_LAT,
  parameter int unsigned ADMIN_LAT  = DEF_ADMIN_LAT,
  parameter int unsigned FIFO_DEPTH = DEF_FIFO_DEPTH,
  localparam int unsigned IDW       = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned RW        = (N_MAX > 1) ? $clog2(N_MAX) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [FLT_W-1:0]   in_a,
  input  logic [FLT_W-1:0]   in_b,
  input  logic [FLT_W-1:0]   in_c,
  input  logic [FLT_W-1:0]   in_y,
  input  logic [IDW-1:0]     in_id,
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [FLT_W-1:0]   out_x,
  output logic [IDW-1:0]     out_id,
  output logic [RW-1:0]      out_row,
  output logic               out_last,
  output logic               fwd_stall,
  output logic               bwd_q_wait,
  output logic [M_MAX-1:0]   thread_busy
);
  localparam int unsigned IN_W  = 4*FLT_W + IDW + 1;
  localparam int unsigned FX_W  = 4*W + IDW + 1;
  localparam int unsigned OUT_W = FLT_W + IDW + RW + 1;
  localparam int unsigned CW    = $clog2(FIFO_DEPTH + 1);

  // ---------------- input side ----------------
  logic              fi_valid, fi_ready;
  logic [IN_W-1:0]   fi_data;
  logic [CW-1:0]     fi_count;

  sync_fifo #(.WIDTH(IN_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready),
    .in_data({in_a, in_b, in_c, in_y, in_id, in_last}),
    .out_valid(fi_valid), .out_ready(fi_ready), .out_data(fi_data),
    .count(fi_count)
  );

  logic [FLT_W-1:0]    fa, fb, fc, fy;
  logic [IDW-1:0]      fid;
  logic                flast;
  logic signed [W-1:0] xa, xb, xc, xy;
  assign {fa, fb, fc, fy, fid, flast} = fi_data;

  flt2fix #(.W(W), .F(F)) u_cv_a (.f(fa), .x(xa));
  flt2fix #(.W(W), .F(F)) u_cv_b (.f(fb), .x(xb));
  flt2fix #(.W(W), .F(F)) u_cv_c (.f(fc), .x(xc));
  flt2fix #(.W(W), .F(F)) u_cv_y (.f(fy), .x(xy));

  logic                ci_valid, ci_ready, ci_last;
  logic signed [W-1:0] ci_a, ci_b, ci_c, ci_y;
  logic [IDW-1:0]      ci_id;

  pipe_reg #(.WIDTH(FX_W)) u_in_reg (
    .clk(clk), .rst_n(rst_n),
    .in_valid(fi_valid), .in_ready(fi_ready), .in_data({xa, xb, xc, xy, fid, flast}),
    .out_valid(ci_valid), .out_ready(ci_ready),
    .out_data({ci_a, ci_b, ci_c, ci_y, ci_id, ci_last})
  );

  // ---------------- core ----------------
  logic                co_valid, co_ready, co_last;
  logic signed [W-1:0] co_x;
  logic [IDW-1:0]      co_id;
  logic [RW-1:0]       co_row;

  thomas_core #(
    .W(W), .F(F), .M_MAX(M_MAX), .N_MAX(N_MAX), .DIV_LAT(DIV_LAT),
    .MUL_LAT(MUL_LAT), .SUB_LAT(SUB_LAT), .ADMIN_LAT(ADMIN_LAT)
  ) u_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ci_valid), .in_ready(ci_ready),
    .in_a(ci_a), .in_b(ci_b), .in_c(ci_c), .in_y(ci_y), .in_id(ci_id), .in_last(ci_last),
    .out_valid(co_valid), .out_ready(co_ready),
    .out_x(co_x), .out_id(co_id), .out_row(co_row), .out_last(co_last),
    .fwd_stall(fwd_stall), .bwd_q_wait(bwd_q_wait), .thread_busy(thread_busy)
  );

  // ---------------- output side ----------------
  logic [FLT_W-1:0] fx;
  fix2flt #(.W(W), .F(F)) u_cv_x (.x(co_x), .f(fx));

  logic             ro_valid, ro_ready;
  logic [OUT_W-1:0] ro_data;
  pipe_reg #(.WIDTH(OUT_W)) u_out_reg (
    .clk(clk), .rst_n(rst_n),
    .in_valid(co_valid), .in_ready(co_ready), .in_data({fx, co_id, co_row, co_last}),
    .out_valid(ro_valid), .out_ready(ro_ready), .out_data(ro_data)
  );

  logic [CW-1:0] fo_count;
  sync_fifo #(.WIDTH(OUT_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ro_valid), .in_ready(ro_ready), .in_data(ro_data),
    .out_valid(out_valid), .out_ready(out_ready),
    .out_data({out_x, out_id, out_row, out_last}),
    .count(fo_count)
  );
endmodule
