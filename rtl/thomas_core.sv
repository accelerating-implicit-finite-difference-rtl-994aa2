// thomas_core: the Thomas tridiagonal solver core.
//
// Solves many independent tridiagonal systems A x = y at once.  Rows
// (a_n, b_n, c_n, y_n) arrive tagged with the id of their system, in row
// order per system, rows of different systems interleaved freely.
//
//   rows -> forward core -> d-divider -> stack array -> backward core -> x
//               ^   (d,z feedback)            |              ^
//               |                     last row: id -> problem queue
//               +------------ thread released after row 0 -----+
//
// The forward core eliminates the sub-diagonal (d_n, z_n), the d-divider
// forms c_n/d_n and z_n/d_n in parallel, the stack array keeps them per
// system, and when a system's last row has been pushed its id enters the
// problem queue.  The backward core takes queued systems into free time
// slots and produces x_N .. x_0.  Forward and backward sweeps of different
// systems run at the same time.  A thread id can start a new system once
// row 0 of its previous one has come out.
//
// For one system of N+1 rows alone, the first result leaves about
// (N+1)(C_F+C_A) + C_/ cycles after its first row entered and the last one
// N*C_B cycles later, with C_F = 69, C_A = 3, C_/ = 61 and C_B = 8 for the
// defaults.  out_ready = 0 freezes the backward core; the forward core then
// keeps going until the problem queue and stacks hold everything.  The
// composition follows the published architecture; the signalling is this
// design's own.
// The fill level of the problem queue is left unconnected on purpose: the
// queue has room for all M_MAX systems, so it can never refuse an id
// (asserted), and lint reports q_count as unused.
module thomas_core
  import thomas_pkg::*;
#(
  parameter int unsigned W         = DEF_W,
  parameter int unsigned F         = DEF_F,
  parameter int unsigned M_MAX     = DEF_M_MAX,
  parameter int unsigned N_MAX     = DEF_N_MAX,
  parameter int unsigned DIV_LAT   = DEF_DIV_LAT,
  parameter int unsigned MUL_LAT   = DEF_MUL_LAT,
  parameter int unsigned SUB_LAT   = DEF_SUB_LAT,
  parameter int unsigned ADMIN_LAT = DEF_ADMIN_LAT,
  localparam int unsigned IDW      = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned RW       = (N_MAX > 1) ? $clog2(N_MAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_a,
  input  logic signed [W-1:0] in_b,
  input  logic signed [W-1:0] in_c,
  input  logic signed [W-1:0] in_y,
  input  logic [IDW-1:0]      in_id,
  input  logic                in_last,
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [W-1:0] out_x,
  output logic [IDW-1:0]      out_id,
  output logic [RW-1:0]       out_row,
  output logic                out_last,
  // observation
  output logic                fwd_stall,    // a row waits for its thread
  output logic                bwd_q_wait,   // a queued system waits for a slot
  output logic [M_MAX-1:0]    thread_busy
);
  // forward -> d-divider
  logic                f_valid, f_last;
  logic signed [W-1:0] f_d, f_z, f_c;
  logic [IDW-1:0]      f_id;
  // release
  logic                rel_valid;
  logic [IDW-1:0]      rel_id;

  thomas_forward #(
    .W(W), .F(F), .M_MAX(M_MAX), .DIV_LAT(DIV_LAT), .MUL_LAT(MUL_LAT),
    .SUB_LAT(SUB_LAT), .ADMIN_LAT(ADMIN_LAT)
  ) u_fwd (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready),
    .in_a(in_a), .in_b(in_b), .in_c(in_c), .in_y(in_y), .in_id(in_id), .in_last(in_last),
    .release_valid(rel_valid), .release_id(rel_id),
    .out_valid(f_valid), .out_d(f_d), .out_z(f_z), .out_c(f_c), .out_id(f_id), .out_last(f_last),
    .thread_busy(thread_busy)
  );
  assign fwd_stall = in_valid && !in_ready;

  // d-divider -> stack array
  logic                g_valid, g_last;
  logic signed [W-1:0] g_cd, g_zd;
  logic [IDW-1:0]      g_id;

  d_divider #(.W(W), .F(F), .DIV_LAT(DIV_LAT), .IDW(IDW)) u_ddiv (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f_valid), .in_d(f_d), .in_z(f_z), .in_c(f_c), .in_id(f_id), .in_last(f_last),
    .out_valid(g_valid), .out_cd(g_cd), .out_zd(g_zd), .out_id(g_id), .out_last(g_last)
  );

  logic                pop_valid;
  logic [IDW-1:0]      pop_id;
  logic [2*W-1:0]      pop_data;
  logic [RW-1:0]       pop_row;

  stack_array #(.W(W), .M_MAX(M_MAX), .N_MAX(N_MAX)) u_stack (
    .clk(clk), .rst_n(rst_n),
    .push_valid(g_valid), .push_id(g_id), .push_data({g_cd, g_zd}),
    .pop_valid(pop_valid), .pop_id(pop_id), .pop_data(pop_data), .pop_row(pop_row)
  );

  // problem queue: ids whose forward sweep is complete
  logic           q_in_ready, q_valid, q_ready;
  logic [IDW-1:0] q_id;
  logic [$clog2(M_MAX+1)-1:0] q_count;

  sync_fifo #(.WIDTH(IDW), .DEPTH(M_MAX)) u_queue (
    .clk(clk), .rst_n(rst_n),
    .in_valid(g_valid && g_last), .in_ready(q_in_ready), .in_data(g_id),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_id),
    .count(q_count)
  );

  logic b_release;
  thomas_backward #(
    .W(W), .F(F), .M_MAX(M_MAX), .N_MAX(N_MAX), .MUL_LAT(MUL_LAT), .SUB_LAT(SUB_LAT)
  ) u_bwd (
    .clk(clk), .rst_n(rst_n), .en(out_ready),
    .q_valid(q_valid), .q_ready(q_ready), .q_id(q_id),
    .pop_valid(pop_valid), .pop_id(pop_id), .pop_data(pop_data), .pop_row(pop_row),
    .out_valid(out_valid), .out_x(out_x), .out_id(out_id), .out_row(out_row), .out_last(out_last),
    .release_valid(b_release), .release_id(rel_id),
    .q_wait(bwd_q_wait)
  );
  assign rel_valid = b_release;

  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
    (g_valid && g_last) |-> q_in_ready)
    else $error("thomas_core: problem queue overflow");
endmodule
