// tb_thomas_wrapper: end-to-end testbench of the complete solver
// (thomas_wrapper) at its default parameters: Q2.30 arithmetic, 10 threads,
// 512 rows, latencies 61/6/2/3, 64-entry FIFOs.  The host side is played by
// this testbench in single-precision floating point.
//
// Phase 1: one Black-Scholes system of 100 rows alone; first row in to last
// result out must take 80*N + 62 core cycles plus the 4 cycles of the
// FIFOs and converter registers (the published model gives 8061 core
// cycles for N = 100, i.e. 40.3 us at 200 MHz).
// Phase 2: a block of 8 such systems, round robin, within the published
// model's 2(m-1) extra cycles.  Phase 2b: a block of 10, where two wait for
// a backward slot.  Phase 3: 30 systems of random sizes (one of 512 rows)
// on the 10 ids, random input gaps and output back-pressure, so the input
// FIFO fills and the core stalls, the output FIFO fills and the backward
// core is frozen, and ids are reused.
// Every result is compared bit for bit with a model of the converters and
// the fixed-point arithmetic, and within 1e-6 with a double-precision
// solver.  The mechanisms are counted and must all have happened.
module tb_thomas_wrapper;
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
  logic [31:0]         in_a, in_b, in_c, in_y;
  logic [IDW-1:0]      in_id;
  logic                out_valid, out_ready, out_last;
  logic [31:0]         out_x;
  logic [IDW-1:0]      out_id;
  logic [RW-1:0]       out_row;
  logic                fwd_stall, bwd_q_wait;
  logic [M_MAX-1:0]    thread_busy;

  thomas_wrapper dut (
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
    logic [31:0] fa[], fb[], fc[], fy[], fx[];
    real    ra[], rb[], rc[], ry[], rx[];
    int     id;
    int     next_out;     // next row expected on the output
    int     done;
  } sys_t;
  sys_t sys [$];
  int   id_owner [M_MAX][$];   // systems per id, in order

  function automatic void finish_sys(inout sys_t s, input int n);
    s.a = new[n]; s.b = new[n]; s.c = new[n]; s.y = new[n];
    s.fa = new[n]; s.fb = new[n]; s.fc = new[n]; s.fy = new[n]; s.fx = new[n];
    for (int i = 0; i < n; i++) begin
      s.fa[i] = real_to_flt(s.ra[i]); s.fb[i] = real_to_flt(s.rb[i]);
      s.fc[i] = real_to_flt(s.rc[i]); s.fy[i] = real_to_flt(s.ry[i]);
      s.a[i] = flt_to_fx(s.fa[i], W, F); s.b[i] = flt_to_fx(s.fb[i], W, F);
      s.c[i] = flt_to_fx(s.fc[i], W, F); s.y[i] = flt_to_fx(s.fy[i], W, F);
      s.ra[i] = from_fx(s.a[i], F); s.rb[i] = from_fx(s.b[i], F);
      s.rc[i] = from_fx(s.c[i], F); s.ry[i] = from_fx(s.y[i], F);
    end
    ref_thomas(s.a, s.b, s.c, s.y, W, F, s.x);
    foreach (s.x[i]) s.fx[i] = fx_to_flt(s.x[i], F);
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
  int out_bp_pct = 0;      // chance per mille of a read pause starting
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
    in_a = sys[s].fa[r]; in_b = sys[s].fb[r];
    in_c = sys[s].fc[r]; in_y = sys[s].fy[r];
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
  int n_infull = 0, n_stall = 0, n_qwait = 0, n_bp = 0, n_overlap = 0, n_sys_done = 0;

  // Sampled 2 time units after the falling edge, when this cycle's inputs
  // and out_ready have settled: what is seen here happens at the next
  // rising edge.
  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      if (fwd_stall) n_stall++;
      if (bwd_q_wait) n_qwait++;
      if (!dut.co_ready && |dut.u_core.u_bwd.slot_busy) n_bp++;
      if (!in_ready && in_valid) n_infull++;
      if (out_valid && dut.u_core.u_fwd.s0_v) n_overlap++;
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
          if (out_x != sys[s].fx[out_row]) begin
            failures++;
            if (failures < 10) $display("sys %0d row %0d: x=%h model %h", s, out_row, out_x, sys[s].fx[out_row]);
          end
          checks++;
          if (rabs(flt_to_real(out_x) - sys[s].rx[out_row]) > 1e-6) begin
            failures++;
            if (failures < 10) $display("sys %0d row %0d: x=%g double %g", s, out_row,
                                        flt_to_real(out_x), sys[s].rx[out_row]);
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

  // The host side stops reading in bursts of up to 1000 cycles, long
  // enough for the 64-entry output FIFO to fill.
  int bp_left = 0;
  always @(negedge clk) begin
    if (bp_left > 0) bp_left--;
    else if ($urandom_range(999, 0) < out_bp_pct) bp_left = $urandom_range(1000, 200);
    out_ready = (bp_left == 0);
  end

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
    if (t != 80 * 100 + 62 + 4) begin
      failures++;
      $display("latency %0d, expected %0d", t, 80 * 100 + 62 + 4);
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
    if (t > 100 * (CF + CA) + CDIV + 100 * CB + 2 * 7 + 2 + 4 ||
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
    out_bp_pct = 5;
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

    $display("input FIFO full=%0d", n_infull);
    checks++;
    if (n_infull == 0) begin failures++; $display("input FIFO never full"); end
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
