// tb_thomas_core: end-to-end testbench of the Thomas core at its default
// parameters (Q2.30, 10 threads, 512 rows, latencies 61/6/2/3).
//
// Phase 1, latency: one Black-Scholes system of 100 rows alone.  The time
// from its first row entering to its last result leaving must be
// 80*N + 62 cycles here, one cycle more than the published model
// N(C_F+C_A) + C_/ + N*C_B = 8061 cycles.
// Phase 2, block: 8 systems of 100 rows fed round robin; the run must end
// within the published model's 2(m-1) extra cycles of phase 1's figure.
// Phase 3, stress: 30 systems of random sizes 1..N_MAX (one of N_MAX) on
// the 10 ids, rows interleaved at random, random gaps on the input and
// random back-pressure on the output.  Ids are reused, so rows stall on
// busy threads, more systems finish their forward sweep than there are
// backward slots, and forward and backward sweeps overlap.
// Every result is compared bit for bit with an integer model of the same
// arithmetic and loosely (1e-6) with a double-precision Thomas solver.
// Counts stalls, queue waits, back-pressure and overlap, and fails if any
// of them never happened.
module tb_thomas_core;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, M_MAX = 10, N_MAX = 512;
  localparam int IDW = 4, RW = 9;
  localparam int CF = 61 + 6 + 2, CA = 3, CDIV = 61, CB = 6 + 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;       // number of rising edges so far
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

  thomas_core dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_a(in_a), .in_b(in_b), .in_c(in_c),
    .in_y(in_y), .in_id(in_id), .in_last(in_last),
    .out_valid(out_valid), .out_ready(out_ready), .out_x(out_x), .out_id(out_id),
    .out_row(out_row), .out_last(out_last),
    .fwd_stall(fwd_stall), .bwd_q_wait(bwd_q_wait), .thread_busy(thread_busy)
  );

  // ---------------- systems ----------------
  typedef struct {
    longint a[], b[], c[], y[], x[];
    real    ra[], rb[], rc[], ry[], rx[];
    int     id;
    int     next_out;     // next row expected on the output
    int     done;
  } sys_t;
  sys_t sys [$];
  int   id_owner [M_MAX][$];   // systems per id, in order

  function automatic void finish_sys(inout sys_t s, input int n);
    s.a = new[n]; s.b = new[n]; s.c = new[n]; s.y = new[n];
    for (int i = 0; i < n; i++) begin
      s.a[i] = to_fx(s.ra[i], F); s.b[i] = to_fx(s.rb[i], F);
      s.c[i] = to_fx(s.rc[i], F); s.y[i] = to_fx(s.ry[i], F);
      s.ra[i] = from_fx(s.a[i], F); s.rb[i] = from_fx(s.b[i], F);
      s.rc[i] = from_fx(s.c[i], F); s.ry[i] = from_fx(s.y[i], F);
    end
    ref_thomas(s.a, s.b, s.c, s.y, W, F, s.x);
    real_thomas(s.ra, s.rb, s.rc, s.ry, s.rx);
    s.next_out = n - 1;
    s.done = 0;
  endfunction

  // European call under Black-Scholes, S_max = 2, K = 1, payoff scaled by 0.9
  function automatic int make_bs(int id, int nn, real r, real sigma);
    sys_t s;
    int n;
    n = nn + 1;
    s.ra = new[n]; s.rb = new[n]; s.rc = new[n]; s.ry = new[n];
    for (int i = 0; i < n; i++) begin
      real sn;
      bs_row(i, nn, r, sigma, 0.001, s.ra[i], s.rb[i], s.rc[i]);
      sn = 2.0 * real'(i) / real'(nn);
      s.ry[i] = 0.9 * ((sn > 1.0) ? sn - 1.0 : 0.0);
    end
    s.id = id;
    finish_sys(s, n);
    sys.push_back(s);
    id_owner[id].push_back(sys.size() - 1);
    return sys.size() - 1;
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom) / 4294967296.0;
  endfunction

  // diagonally dominant random system with values well inside Q2.30
  function automatic int make_rand(int id, int n);
    sys_t s;
    s.ra = new[n]; s.rb = new[n]; s.rc = new[n]; s.ry = new[n];
    for (int i = 0; i < n; i++) begin
      s.ra[i] = (i == 0) ? 0.0 : urand(-0.3, 0.3);
      s.rb[i] = urand(1.2, 1.9);
      s.rc[i] = (i == n - 1) ? 0.0 : urand(-0.3, 0.3);
      s.ry[i] = urand(-0.5, 0.5);
    end
    s.id = id;
    finish_sys(s, n);
    sys.push_back(s);
    id_owner[id].push_back(sys.size() - 1);
    return sys.size() - 1;
  endfunction

  // ---------------- driver ----------------
  int in_gap_pct = 0;      // chance of an idle input cycle
  int out_bp_pct = 0;      // chance of out_ready = 0
  longint unsigned first_in_cycle, last_out_cycle;
  bit   first_seen;

  // Inputs change just after a falling edge; a row is taken at the next
  // rising edge if in_ready is 1 then.
  task automatic send_row(int s, int r);
    while ($urandom_range(99, 0) < in_gap_pct) begin
      in_valid = 1'b0;
      @(negedge clk);
    end
    in_valid = 1'b1;
    in_a = W'(sys[s].a[r]); in_b = W'(sys[s].b[r]);
    in_c = W'(sys[s].c[r]); in_y = W'(sys[s].y[r]);
    in_id = IDW'(sys[s].id); in_last = (r == sys[s].a.size() - 1);
    #1;
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    if (!first_seen) begin first_seen = 1; first_in_cycle = cycle; end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // Rows of the given systems, interleaved: round robin, or at random.
  task automatic send_interleaved(int list[$], bit random_order);
    int ptr[$], k, left;
    foreach (list[i]) ptr.push_back(0);
    left = list.size();
    k = 0;
    while (left > 0) begin
      if (random_order) k = $urandom_range(list.size() - 1, 0);
      if (ptr[k] < sys[list[k]].a.size()) begin
        send_row(list[k], ptr[k]);
        ptr[k]++;
        if (ptr[k] == sys[list[k]].a.size()) left--;
      end
      if (!random_order) k = (k + 1) % list.size();
    end
  endtask

  // ---------------- monitor ----------------
  int n_results = 0;
  int n_stall = 0, n_qwait = 0, n_bp = 0, n_overlap = 0, n_sys_done = 0;

  // Sampled 2 time units after the falling edge, when this cycle's inputs
  // and out_ready have settled: what is seen here happens at the next
  // rising edge.
  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      if (fwd_stall) n_stall++;
      if (bwd_q_wait) n_qwait++;
      if (!out_ready && dut.u_bwd.v_q) n_bp++;
      if (out_valid && dut.u_fwd.s0_v) n_overlap++;
    end
    if (rst_n && out_valid && out_ready) begin
      int s;
      n_results++;
      last_out_cycle = cycle;
      checks++;
      if (id_owner[out_id].size() == 0) begin
        failures++;
        $display("result for idle id %0d", out_id);
      end else begin
        s = id_owner[out_id][0];
        if (int'(out_row) != sys[s].next_out) begin
          failures++;
          if (failures < 10) $display("sys %0d: row %0d, expected row %0d", s, out_row, sys[s].next_out);
        end else begin
          checks++;
          if (longint'(out_x) != sys[s].x[out_row]) begin
            failures++;
            if (failures < 10) $display("sys %0d row %0d: x=%0d model %0d", s, out_row, out_x, sys[s].x[out_row]);
          end
          checks++;
          if (rabs(from_fx(longint'(out_x), F) - sys[s].rx[out_row]) > 1e-6) begin
            failures++;
            if (failures < 10) $display("sys %0d row %0d: x=%g double %g", s, out_row,
                                        from_fx(longint'(out_x), F), sys[s].rx[out_row]);
          end
        end
        checks++;
        if (out_last != (out_row == 0)) failures++;
        sys[s].next_out--;
        if (out_last) begin
          sys[s].done = 1;
          n_sys_done++;
          void'(id_owner[out_id].pop_front());
        end
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(99, 0) >= out_bp_pct);

  task automatic wait_all_done();
    int guard;
    guard = 0;
    while (n_sys_done < sys.size() && guard < 2000000) begin
      @(negedge clk);
      guard++;
    end
    checks++;
    if (n_sys_done != sys.size()) begin
      failures++;
      $display("only %0d of %0d systems finished", n_sys_done, sys.size());
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned t;
    int list[$];
    rst_n = 0; in_valid = 0; in_a = 0; in_b = 0; in_c = 0; in_y = 0; in_id = 0; in_last = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- phase 1: single system, N = 100 ----
    first_seen = 0;
    void'(make_bs(0, 99, 0.05, 0.30));       // 100 rows
    send_row(0, 0);
    for (int r = 1; r < 100; r++) send_row(0, r);
    wait_all_done();
    t = last_out_cycle - first_in_cycle;
    $display("single system of 100 rows: %0d cycles (published model %0d)", t,
             100 * (CF + CA) + CDIV + 100 * CB);
    checks++;
    if (t != 80 * 100 + 62) begin
      failures++;
      $display("latency %0d, expected %0d", t, 80 * 100 + 62);
    end

    // ---- phase 2: a block of 8 systems, N = 100, round robin ----
    repeat (20) @(negedge clk);
    first_seen = 0;
    list.delete();
    for (int k = 0; k < 8; k++)
      list.push_back(make_bs(k, 99, urand(0.01, 0.05), urand(0.10, 0.30)));
    send_interleaved(list, 0);
    wait_all_done();
    t = last_out_cycle - first_in_cycle;
    $display("block of 8 systems of 100 rows: %0d cycles (published model %0d)", t,
             100 * (CF + CA) + CDIV + 100 * CB + 2 * 7);
    checks++;
    if (t > 100 * (CF + CA) + CDIV + 100 * CB + 2 * 7 + 2 ||
        t < 100 * (CF + CA) + CDIV + 100 * CB) begin
      failures++;
      $display("block latency %0d outside the published model", t);
    end

    // ---- phase 2b: a block of M_MAX = 10 systems: two wait for a slot ----
    repeat (20) @(negedge clk);
    first_seen = 0;
    list.delete();
    for (int k = 0; k < M_MAX; k++)
      list.push_back(make_bs(k, 99, urand(0.01, 0.05), urand(0.10, 0.30)));
    send_interleaved(list, 0);
    wait_all_done();
    t = last_out_cycle - first_in_cycle;
    $display("block of 10 systems of 100 rows: %0d cycles", t);

    // ---- phase 3: stress ----
    repeat (20) @(negedge clk);
    in_gap_pct = 20;
    out_bp_pct = 30;
    for (int wave = 0; wave < 3; wave++) begin
      list.delete();
      for (int k = 0; k < M_MAX; k++) begin
        int n;
        n = (wave == 1 && k == 3) ? N_MAX : $urandom_range(60, 1);
        if (wave == 2 && k % 3 == 0) list.push_back(make_bs(k, $urandom_range(40, 8),
                                                            urand(0.01, 0.05), urand(0.10, 0.30)));
        else list.push_back(make_rand(k, n));
      end
      send_interleaved(list, 1);
    end
    out_bp_pct = 0;
    wait_all_done();

    $display("results=%0d systems=%0d stalls=%0d queue_waits=%0d backpressure=%0d overlap=%0d",
             n_results, n_sys_done, n_stall, n_qwait, n_bp, n_overlap);
    checks += 4;
    if (n_stall == 0)   begin failures++; $display("no input stall seen"); end
    if (n_qwait == 0)   begin failures++; $display("no queue wait seen"); end
    if (n_bp == 0)      begin failures++; $display("no output back-pressure seen"); end
    if (n_overlap == 0) begin failures++; $display("forward and backward never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
