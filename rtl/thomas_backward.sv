// thomas_backward: back-substitution core of the Thomas solver.
//
// Computes x_n = (z/d)_n - (c/d)_n * x_{n+1} from the pairs the d-divider
// left on the system's stack, starting at the last row with x_{N+1} = 0.
// With both quotients precomputed, the recurrence is only a multiply and a
// subtract, C_B = MUL_LAT + SUB_LAT cycles (8 for the defaults), and the
// pipeline holds C_B independent systems at once.
//
// Time slots: a phase counter cycles through the C_B slots.  A slot that
// holds a system issues that system's next row each time its phase comes
// round, with x_{n+1} taken straight from the subtractor output, which is
// the result of the same slot's previous row.  One cycle ahead of a slot's
// phase the core pops the slot's stack (the pop has one cycle of read
// latency); if the slot is free and the problem queue offers a finished
// forward sweep, the slot is claimed for it ("space in the pipeline");
// otherwise the problem stays queued.  A slot is freed when row 0 issues.
//
// Outputs: x_n with its id and row index, rows N..0 in that order, one
// every C_B cycles per slot; out_last marks row 0 and also releases the
// thread id (release_*).  en freezes the whole core, slots, phase and
// pipeline alike, and is the back-pressure from the output side; out_valid
// is only raised while en is 1.  The factorised recurrence and its latency
// follow the published design; the slot scheme and the back-pressure are
// this design's realisation of it.
module thomas_backward
  import thomas_pkg::*;
#(
  parameter int unsigned W       = DEF_W,
  parameter int unsigned F       = DEF_F,
  parameter int unsigned M_MAX   = DEF_M_MAX,
  parameter int unsigned N_MAX   = DEF_N_MAX,
  parameter int unsigned MUL_LAT = DEF_MUL_LAT,
  parameter int unsigned SUB_LAT = DEF_SUB_LAT,
  localparam int unsigned IDW    = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned RW     = (N_MAX > 1) ? $clog2(N_MAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  // problem queue
  input  logic                q_valid,
  output logic                q_ready,
  input  logic [IDW-1:0]      q_id,
  // stack pop port
  output logic                pop_valid,
  output logic [IDW-1:0]      pop_id,
  input  logic [2*W-1:0]      pop_data,     // {c/d, z/d}
  input  logic [RW-1:0]       pop_row,
  // results
  output logic                out_valid,
  output logic signed [W-1:0] out_x,
  output logic [IDW-1:0]      out_id,
  output logic [RW-1:0]       out_row,
  output logic                out_last,
  output logic                release_valid,
  output logic [IDW-1:0]      release_id,
  // observation: a queued problem waits for a free slot this cycle
  output logic                q_wait
);
  localparam int unsigned NS  = MUL_LAT + SUB_LAT;
  localparam int unsigned PHW = (NS > 1) ? $clog2(NS) : 1;

  initial assert (NS >= 2) else $fatal(1, "thomas_backward: need MUL_LAT + SUB_LAT >= 2");

  logic [PHW-1:0] ph, nph;
  logic [NS-1:0]  slot_busy;
  logic [IDW-1:0] slot_id [NS];

  // pending pop (data arrives in the slot's issue cycle)
  logic           pend_valid, pend_first;
  logic [IDW-1:0] pend_id;

  logic claim;
  always_comb begin
    nph       = (ph == PHW'(NS - 1)) ? '0 : ph + 1'b1;
    claim     = !slot_busy[nph] && q_valid;
    q_ready   = en && !slot_busy[nph];
    q_wait    = en && q_valid && slot_busy[nph];
    pop_valid = en && (slot_busy[nph] || q_valid);
    pop_id    = slot_busy[nph] ? slot_id[nph] : q_id;
  end

  logic issue, issue_last;
  always_comb begin
    issue      = en && pend_valid;
    issue_last = issue && (pop_row == '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ph         <= '0;
      slot_busy  <= '0;
      pend_valid <= 1'b0;
      pend_first <= 1'b0;
    end else if (en) begin
      ph         <= nph;
      pend_valid <= pop_valid;
      pend_first <= claim;
      if (claim) slot_busy[nph] <= 1'b1;
      if (issue_last) slot_busy[ph] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      pend_id <= pop_id;
      if (claim) slot_id[nph] <= q_id;
    end
  end

  // ---------------- arithmetic ----------------
  logic signed [W-1:0] cd, zd, x_fb, xin, prod, zd_d;
  assign cd  = pop_data[2*W-1:W];
  assign zd  = pop_data[W-1:0];
  assign xin = pend_first ? '0 : x_fb;

  fx_mul #(.W(W), .F(F), .LAT(MUL_LAT)) u_mul (.clk(clk), .en(en), .a(cd), .b(xin), .p(prod));
  delay_line #(.WIDTH(W), .LAT(MUL_LAT)) u_zd (.clk(clk), .en(en), .d(zd), .q(zd_d));
  fx_sub #(.W(W), .LAT(SUB_LAT)) u_sub (.clk(clk), .en(en), .a(zd_d), .b(prod), .r(x_fb));

  logic v_q;
  valid_delay #(.LAT(NS)) u_v (.clk(clk), .rst_n(rst_n), .en(en), .d(issue), .q(v_q));
  delay_line #(.WIDTH(IDW + RW), .LAT(NS)) u_side (
    .clk(clk), .en(en), .d({pend_id, pop_row}), .q({out_id, out_row})
  );

  assign out_x         = x_fb;
  assign out_valid     = v_q && en;
  assign out_last      = (out_row == '0);
  assign release_valid = out_valid && out_last;
  assign release_id    = out_id;

  a_slot_has_rows: assert property (@(posedge clk) disable iff (!rst_n)
    en && pend_valid && !pend_first |-> pend_id == slot_id[ph])
    else $error("thomas_backward: slot bookkeeping mismatch");
endmodule
