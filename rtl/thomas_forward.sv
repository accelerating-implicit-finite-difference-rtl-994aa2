// thomas_forward: forward-elimination core of the Thomas solver.
//
// For each row n of a tridiagonal system it computes
//     l_n = a_n / d_{n-1},  d_n = b_n - l_n * c_{n-1},  z_n = y_n - l_n * z_{n-1}
// with one divider feeding two multipliers and two subtractors, the d and
// z branches running side by side.  The per-row recurrence goes through the
// whole arithmetic pipeline (C_F = DIV_LAT + MUL_LAT + SUB_LAT cycles), so
// the pipeline is filled with rows of different, independent systems.  Each
// row carries the id ("thread") of its system; a table indexed by id holds
// that system's d_{n-1}, z_{n-1} and c_{n-1} and whether one of its rows is
// still in the pipeline.
//
// Scheduling: the row at the input is issued when its thread has no row in
// flight; otherwise the input stalls (in_ready = 0) until the previous row
// of that thread has been written back.  A row arriving for an idle thread
// starts a new system and is issued with numerator 0 and divisor 1, so
// that d_0 = b_0 and z_0 = y_0 come out of the same pipeline.  in_last marks
// the final row of a system.  A thread is only reopened for a new system
// after the backward core reports it finished (release_*), because its
// stack still holds data until then.
//
// Timing: issue register (1) + arithmetic (C_F) + result register
// (ADMIN_LAT-2) + write-back (1), so a thread can issue one row every
// C_F + ADMIN_LAT cycles (72 for the defaults), matching the published
// forward iteration and administration latencies.  out_* presents every
// finished row (d_n, z_n, and the row's own c_n) to the d-divider, one
// clock before the write-back takes effect.  Those latencies and the
// dataflow follow the published design; the thread table, the stall rule
// and the first/last handling are this design's own.
module thomas_forward
  import thomas_pkg::*;
#(
  parameter int unsigned W         = DEF_W,
  parameter int unsigned F         = DEF_F,
  parameter int unsigned M_MAX     = DEF_M_MAX,
  parameter int unsigned DIV_LAT   = DEF_DIV_LAT,
  parameter int unsigned MUL_LAT   = DEF_MUL_LAT,
  parameter int unsigned SUB_LAT   = DEF_SUB_LAT,
  parameter int unsigned ADMIN_LAT = DEF_ADMIN_LAT,
  localparam int unsigned IDW      = (M_MAX > 1) ? $clog2(M_MAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // row input
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [W-1:0] in_a,
  input  logic signed [W-1:0] in_b,
  input  logic signed [W-1:0] in_c,
  input  logic signed [W-1:0] in_y,
  input  logic [IDW-1:0]      in_id,
  input  logic                in_last,
  // thread release from the backward core
  input  logic                release_valid,
  input  logic [IDW-1:0]      release_id,
  // finished rows towards the d-divider
  output logic                out_valid,
  output logic signed [W-1:0] out_d,
  output logic signed [W-1:0] out_z,
  output logic signed [W-1:0] out_c,
  output logic [IDW-1:0]      out_id,
  output logic                out_last,
  // busy threads (for observation)
  output logic [M_MAX-1:0]    thread_busy
);
  initial assert (ADMIN_LAT >= 2) else $fatal(1, "thomas_forward: ADMIN_LAT must be >= 2");
  initial assert (F + 2 <= W) else $fatal(1, "thomas_forward: need at least 2 integer bits");

  localparam logic signed [W-1:0] ONE = W'(1) << F;

  // ---------------- thread table ----------------
  logic signed [W-1:0] d_prev [M_MAX];
  logic signed [W-1:0] z_prev [M_MAX];
  logic signed [W-1:0] c_prev [M_MAX];
  logic [M_MAX-1:0]    inflight;   // a row of this thread is in the pipeline
  logic [M_MAX-1:0]    active;     // a system is open in the forward sweep
  logic [M_MAX-1:0]    busy;       // id allocated until the backward sweep ends

  assign thread_busy = busy;

  logic first, issue;
  always_comb begin
    first    = !active[in_id];
    in_ready = !inflight[in_id] && (active[in_id] || !busy[in_id]);
    issue    = in_valid && in_ready;
  end

  // ---------------- issue register ----------------
  logic                s0_v;
  logic signed [W-1:0] s0_num, s0_den, s0_b, s0_cp, s0_y, s0_zp, s0_c;
  logic [IDW-1:0]      s0_id;
  logic                s0_last;

  always_ff @(posedge clk) begin
    if (!rst_n) s0_v <= 1'b0;
    else        s0_v <= issue;
  end
  always_ff @(posedge clk) begin
    if (issue) begin
      s0_num  <= first ? '0  : in_a;
      s0_den  <= first ? ONE : d_prev[in_id];
      s0_cp   <= first ? '0  : c_prev[in_id];
      s0_zp   <= first ? '0  : z_prev[in_id];
      s0_b    <= in_b;
      s0_y    <= in_y;
      s0_c    <= in_c;
      s0_id   <= in_id;
      s0_last <= in_last;
    end
  end

  // ---------------- divider: l = a / d_prev ----------------
  logic signed [W-1:0] l;
  fx_div #(.W(W), .F(F), .LAT(DIV_LAT)) u_div (
    .clk(clk), .en(1'b1), .n(s0_num), .d(s0_den), .q(l)
  );

  logic                s1_v;
  logic signed [W-1:0] s1_b, s1_cp, s1_y, s1_zp, s1_c;
  logic [IDW-1:0]      s1_id;
  logic                s1_last;
  valid_delay #(.LAT(DIV_LAT)) u_v1 (.clk(clk), .rst_n(rst_n), .en(1'b1), .d(s0_v), .q(s1_v));
  delay_line #(.WIDTH(5*W + IDW + 1), .LAT(DIV_LAT)) u_d1 (
    .clk(clk), .en(1'b1),
    .d({s0_b, s0_cp, s0_y, s0_zp, s0_c, s0_id, s0_last}),
    .q({s1_b, s1_cp, s1_y, s1_zp, s1_c, s1_id, s1_last})
  );

  // ---------------- multipliers: l*c_prev, l*z_prev ----------------
  logic signed [W-1:0] lc, lz;
  fx_mul #(.W(W), .F(F), .LAT(MUL_LAT)) u_mul_c (.clk(clk), .en(1'b1), .a(l), .b(s1_cp), .p(lc));
  fx_mul #(.W(W), .F(F), .LAT(MUL_LAT)) u_mul_z (.clk(clk), .en(1'b1), .a(l), .b(s1_zp), .p(lz));

  logic                s2_v;
  logic signed [W-1:0] s2_b, s2_y, s2_c;
  logic [IDW-1:0]      s2_id;
  logic                s2_last;
  valid_delay #(.LAT(MUL_LAT)) u_v2 (.clk(clk), .rst_n(rst_n), .en(1'b1), .d(s1_v), .q(s2_v));
  delay_line #(.WIDTH(3*W + IDW + 1), .LAT(MUL_LAT)) u_d2 (
    .clk(clk), .en(1'b1),
    .d({s1_b, s1_y, s1_c, s1_id, s1_last}),
    .q({s2_b, s2_y, s2_c, s2_id, s2_last})
  );

  // ---------------- subtractors: d = b - l*c_prev, z = y - l*z_prev ----------------
  logic signed [W-1:0] dn, zn;
  fx_sub #(.W(W), .LAT(SUB_LAT)) u_sub_d (.clk(clk), .en(1'b1), .a(s2_b), .b(lc), .r(dn));
  fx_sub #(.W(W), .LAT(SUB_LAT)) u_sub_z (.clk(clk), .en(1'b1), .a(s2_y), .b(lz), .r(zn));

  logic                s3_v;
  logic signed [W-1:0] s3_c;
  logic [IDW-1:0]      s3_id;
  logic                s3_last;
  valid_delay #(.LAT(SUB_LAT)) u_v3 (.clk(clk), .rst_n(rst_n), .en(1'b1), .d(s2_v), .q(s3_v));
  delay_line #(.WIDTH(W + IDW + 1), .LAT(SUB_LAT)) u_d3 (
    .clk(clk), .en(1'b1),
    .d({s2_c, s2_id, s2_last}),
    .q({s3_c, s3_id, s3_last})
  );

  // ---------------- result register(s) ----------------
  valid_delay #(.LAT(ADMIN_LAT - 2)) u_v4 (.clk(clk), .rst_n(rst_n), .en(1'b1), .d(s3_v), .q(out_valid));
  delay_line #(.WIDTH(3*W + IDW + 1), .LAT(ADMIN_LAT - 2)) u_d4 (
    .clk(clk), .en(1'b1),
    .d({dn, zn, s3_c, s3_id, s3_last}),
    .q({out_d, out_z, out_c, out_id, out_last})
  );

  // ---------------- write-back and thread state ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      inflight <= '0;
      active   <= '0;
      busy     <= '0;
    end else begin
      if (release_valid) busy[release_id] <= 1'b0;
      if (out_valid)     inflight[out_id] <= 1'b0;
      if (issue) begin
        inflight[in_id] <= 1'b1;
        active[in_id]   <= !in_last;
        busy[in_id]     <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (issue) c_prev[in_id] <= in_c;
    if (out_valid) begin
      d_prev[out_id] <= out_d;
      z_prev[out_id] <= out_z;
    end
  end

  // A thread is released only after its forward sweep has closed.
  a_release: assert property (@(posedge clk) disable iff (!rst_n)
    release_valid |-> !active[release_id] && !inflight[release_id])
    else $error("thomas_forward: release of a thread still in the forward sweep");
  a_id: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_id < IDW'(M_MAX))
    else $error("thomas_forward: id out of range");
endmodule
