// tb_format_run: one Thomas core at a reduced fixed-point format and the
// test that runs on it; instantiated by tb_thomas_formats once per format.
//
// The core gets the format's word width W, fraction bits F and divider
// latency DIV_LAT; multiplier (6), subtractor (2), administration (3),
// threads (10) and rows (512) stay at their defaults, as in the published
// latency table.  The test sends one 100-row Black-Scholes system alone and
// checks that it takes (DIV_LAT + 11) * n + DIV_LAT + 8 n + 1 cycles from
// the first row accepted to the last result, then a block of 10 such
// systems round robin.  Every x_n must equal the bit-exact integer model
// of the format and lie within TOL_LSB units of the last place of a
// double-precision solution.  done rises when the test has finished;
// checks and failures are its counts.
module tb_format_run #(
  parameter int W       = 16,
  parameter int F       = 14,
  parameter int DIV_LAT = 36,
  parameter int TOL_LSB = 64
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   done
);
  import tb_fx_ref::*;

  localparam int M_MAX = 10, IDW = 4, RW = 9;

  logic rst_n;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic                in_valid, in_ready, in_last;
  logic signed [W-1:0] in_a, in_b, in_c, in_y;
  logic [IDW-1:0]      in_id;
  logic                out_valid, out_ready, out_last;
  logic signed [W-1:0] out_x;
  logic [IDW-1:0]      out_id;
  logic [RW-1:0]       out_row;
  logic                fwd_stall, bwd_q_wait;
  logic [M_MAX-1:0]    thread_busy;

  thomas_core #(.W(W), .F(F), .DIV_LAT(DIV_LAT)) dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_a(in_a), .in_b(in_b), .in_c(in_c),
    .in_y(in_y), .in_id(in_id), .in_last(in_last),
    .out_valid(out_valid), .out_ready(out_ready), .out_x(out_x), .out_id(out_id),
    .out_row(out_row), .out_last(out_last),
    .fwd_stall(fwd_stall), .bwd_q_wait(bwd_q_wait), .thread_busy(thread_busy)
  );

  // one system per id at a time
  longint a [M_MAX][], b [M_MAX][], c [M_MAX][], y [M_MAX][], x [M_MAX][];
  real    rx [M_MAX][];
  int     next_out [M_MAX];
  int     n_done = 0;
  real    max_err = 0.0;
  longint unsigned first_in, last_out;

  function automatic void make_bs(int id, int nn, real r, real sigma);
    real ra[], rb[], rc[], ry[];
    int n;
    n = nn + 1;
    ra = new[n]; rb = new[n]; rc = new[n]; ry = new[n];
    a[id] = new[n]; b[id] = new[n]; c[id] = new[n]; y[id] = new[n];
    for (int i = 0; i < n; i++) begin
      real sn;
      bs_row(i, nn, r, sigma, 0.001, ra[i], rb[i], rc[i]);
      sn = 2.0 * real'(i) / real'(nn);
      ry[i] = 0.9 * ((sn > 1.0) ? sn - 1.0 : 0.0);
      a[id][i] = to_fx(ra[i], F); b[id][i] = to_fx(rb[i], F);
      c[id][i] = to_fx(rc[i], F); y[id][i] = to_fx(ry[i], F);
      ra[i] = from_fx(a[id][i], F); rb[i] = from_fx(b[id][i], F);
      rc[i] = from_fx(c[id][i], F); ry[i] = from_fx(y[id][i], F);
    end
    ref_thomas(a[id], b[id], c[id], y[id], W, F, x[id]);
    real_thomas(ra, rb, rc, ry, rx[id]);
    next_out[id] = n - 1;
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom) / 4294967296.0;
  endfunction

  // Drive one row after a falling edge; it is taken at the next rising
  // edge on which in_ready is high.
  task automatic send_row(int id, int r);
    in_valid = 1'b1;
    in_a = W'(a[id][r]); in_b = W'(b[id][r]); in_c = W'(c[id][r]); in_y = W'(y[id][r]);
    in_id = IDW'(id); in_last = (r == a[id].size() - 1);
    #1;
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    if (first_in == 0) first_in = cycle;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  always @(negedge clk) begin
    #2;
    if (rst_n && out_valid && out_ready) begin
      int id;
      real e;
      id = int'(out_id);
      last_out = cycle;
      checks++;
      if (int'(out_row) != next_out[id]) begin
        failures++;
        $display("[W=%0d] id %0d: row %0d, expected %0d", W, id, out_row, next_out[id]);
      end else begin
        checks++;
        if (longint'(out_x) != x[id][out_row]) begin
          failures++;
          if (failures < 10) $display("[W=%0d] id %0d row %0d: x=%0d model %0d", W, id, out_row,
                                      out_x, x[id][out_row]);
        end
        e = rabs(from_fx(longint'(out_x), F) - rx[id][out_row]);
        if (e > max_err) max_err = e;
        checks++;
        if (e > real'(TOL_LSB) / (2.0 ** F)) begin
          failures++;
          if (failures < 10) $display("[W=%0d] id %0d row %0d: error %g", W, id, out_row, e);
        end
      end
      next_out[id]--;
      if (out_last) n_done++;
    end
  end

  initial begin
    longint unsigned t;
    int n;
    checks = 0; failures = 0; done = 0;
    rst_n = 0; in_valid = 0; in_a = 0; in_b = 0; in_c = 0; in_y = 0; in_id = 0; in_last = 0;
    out_ready = 1;
    first_in = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // one system alone
    n = 100;
    make_bs(5, n - 1, urand(0.01, 0.05), urand(0.10, 0.30));
    for (int r = 0; r < n; r++) send_row(5, r);
    while (n_done < 1) @(negedge clk);
    t = last_out - first_in;
    checks++;
    if (t != longint'((DIV_LAT + 11) * n + DIV_LAT + 8 * n + 1)) begin
      failures++;
      $display("[W=%0d] latency %0d, expected %0d", W, t, (DIV_LAT + 11) * n + DIV_LAT + 8 * n + 1);
    end
    $display("[W=%0d F=%0d] single system of %0d rows: %0d cycles (published model %0d)", W, F, n, t,
             (DIV_LAT + 11) * n + DIV_LAT + 8 * n);

    // a block of 10, round robin
    repeat (20) @(negedge clk);
    for (int k = 0; k < M_MAX; k++) make_bs(k, n - 1, urand(0.01, 0.05), urand(0.10, 0.30));
    for (int r = 0; r < n; r++)
      for (int k = 0; k < M_MAX; k++) send_row(k, r);
    while (n_done < 1 + M_MAX) @(negedge clk);
    checks++;
    if (bwd_q_wait || thread_busy != 0) begin
      failures++; $display("[W=%0d] core not idle at the end", W);
    end
    $display("[W=%0d F=%0d] 11 systems solved, largest error against double %g", W, F, max_err);
    done = 1;
  end
endmodule
