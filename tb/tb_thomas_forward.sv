// tb_thomas_forward: self-checking testbench of the forward-reduction core
// at its default parameters (Q2.30, 10 threads, divider 61, multiplier 6,
// subtractor 2, administration 3 cycles).
//
// Phase 1: one thread alone.  Rows must be accepted exactly C_F + C_A = 72
// cycles apart (the loop period of the recurrence) and leave 72 cycles
// apart.
// Phase 2: random systems on all 10 threads, offered in random order with
// random gaps.  Every output row (d_n, z_n, c_n, id, last) is compared bit
// for bit with the integer model of the recurrence.  A thread's last row
// leaves it busy until a release, given here after a random delay; a new
// system offered on a busy thread must be refused (counted).
module tb_thomas_forward;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, M_MAX = 10, IDW = 4;
  localparam int PERIOD = 61 + 6 + 2 + 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  logic                in_valid, in_ready, in_last, release_valid;
  logic signed [W-1:0] in_a, in_b, in_c, in_y;
  logic [IDW-1:0]      in_id, release_id;
  logic                out_valid, out_last;
  logic signed [W-1:0] out_d, out_z, out_c;
  logic [IDW-1:0]      out_id;
  logic [M_MAX-1:0]    thread_busy;

  thomas_forward dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_a(in_a), .in_b(in_b), .in_c(in_c),
    .in_y(in_y), .in_id(in_id), .in_last(in_last),
    .release_valid(release_valid), .release_id(release_id),
    .out_valid(out_valid), .out_d(out_d), .out_z(out_z), .out_c(out_c),
    .out_id(out_id), .out_last(out_last), .thread_busy(thread_busy)
  );

  initial begin
    #20000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // one system per thread at a time
  longint ta[M_MAX][$], tb_[M_MAX][$], tc[M_MAX][$], ty[M_MAX][$];
  longint ed[M_MAX][$], ez[M_MAX][$], ec[M_MAX][$];
  bit     elast[M_MAX][$];
  int     sent[M_MAX], rows[M_MAX];
  bit     done_out[M_MAX];

  function automatic longint rfx(real lo, real hi);
    return to_fx(lo + (hi - lo) * real'($urandom) / 4294967295.0, F);
  endfunction

  function automatic void new_sys(int id, int n);
    longint d, z, l, one;
    one = longint'(1) << F;
    ta[id].delete(); tb_[id].delete(); tc[id].delete(); ty[id].delete();
    for (int i = 0; i < n; i++) begin
      ta[id].push_back(i == 0 ? 0 : rfx(-0.3, 0.3));
      tb_[id].push_back(rfx(1.2, 1.9));
      tc[id].push_back(i == n - 1 ? 0 : rfx(-0.3, 0.3));
      ty[id].push_back(rfx(-0.5, 0.5));
    end
    for (int i = 0; i < n; i++) begin
      l = (i == 0) ? ref_div(0, one, W, F) : ref_div(ta[id][i], d, W, F);
      d = ref_sub(tb_[id][i], ref_mul(l, (i == 0) ? 0 : tc[id][i-1], W, F), W);
      z = ref_sub(ty[id][i], ref_mul(l, (i == 0) ? 0 : z, W, F), W);
      ed[id].push_back(d); ez[id].push_back(z); ec[id].push_back(tc[id][i]);
      elast[id].push_back(i == n - 1);
    end
    sent[id] = 0; rows[id] = n; done_out[id] = 0;
  endfunction

  // ---------------- monitor ----------------
  longint unsigned last_out[M_MAX];
  int n_out = 0, n_busy_refused = 0, n_period_checked = 0;
  bit check_out_period = 0;
  always @(negedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      int id;
      id = int'(out_id);
      n_out++;
      checks++;
      if (ed[id].size() == 0) begin
        failures++; $display("unexpected row on id %0d", id);
      end else begin
        if (longint'(out_d) != ed[id][0] || longint'(out_z) != ez[id][0] ||
            longint'(out_c) != ec[id][0] || out_last != elast[id][0]) begin
          failures++;
          if (failures < 10) $display("id %0d: d=%0d/%0d z=%0d/%0d c=%0d/%0d last=%0d/%0d", id,
                                      out_d, ed[id][0], out_z, ez[id][0], out_c, ec[id][0],
                                      out_last, elast[id][0]);
        end
        if (check_out_period && last_out[id] != 0) begin
          checks++;
          n_period_checked++;
          if (cycle - last_out[id] != PERIOD) begin
            failures++; $display("output period %0d", cycle - last_out[id]);
          end
        end
        last_out[id] = cycle;
        if (out_last) done_out[id] = 1;
        void'(ed[id].pop_front()); void'(ez[id].pop_front());
        void'(ec[id].pop_front()); void'(elast[id].pop_front());
      end
    end
  end

  // Release of finished threads after a random delay (the backward pass).
  int rel_wait[M_MAX];
  bit released[M_MAX];
  always @(negedge clk) begin
    release_valid = 0;
    release_id = '0;
    if (rst_n) begin
      for (int k = 0; k < M_MAX; k++) begin
        if (done_out[k] && !released[k]) begin
          if (rel_wait[k] > 0) rel_wait[k]--;
          else if (!release_valid) begin
            release_valid = 1; release_id = IDW'(k); released[k] = 1;
          end
        end
      end
    end
  end

  task automatic drive_row(int id);
    in_valid = 1;
    in_id = IDW'(id);
    in_a = W'(ta[id][sent[id]]); in_b = W'(tb_[id][sent[id]]);
    in_c = W'(tc[id][sent[id]]); in_y = W'(ty[id][sent[id]]);
    in_last = (sent[id] == rows[id] - 1);
  endtask

  initial begin
    longint unsigned t_prev;
    in_valid = 0; in_a = 0; in_b = 0; in_c = 0; in_y = 0; in_id = 0; in_last = 0;
    release_valid = 0; release_id = 0;
    for (int k = 0; k < M_MAX; k++) begin
      sent[k] = 0; rows[k] = 0; done_out[k] = 0; released[k] = 1; rel_wait[k] = 0;
      last_out[k] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- phase 1: one thread, back to back ----
    new_sys(2, 20);
    released[2] = 0; rel_wait[2] = 5;
    check_out_period = 1;
    t_prev = 0;
    while (sent[2] < rows[2]) begin
      drive_row(2);
      #1;
      if (in_ready) begin
        if (t_prev != 0) begin
          checks++;
          if (cycle - t_prev != PERIOD) begin
            failures++; $display("input period %0d, expected %0d", cycle - t_prev, PERIOD);
          end
        end
        t_prev = cycle;
        sent[2]++;
      end
      @(negedge clk);
      in_valid = 0;
    end
    while (!released[2]) @(negedge clk);
    check_out_period = 0;
    $display("phase 1: %0d output periods checked", n_period_checked);

    // ---- phase 2: random traffic on all threads ----
    for (int round = 0; round < 6; round++) begin
      int left;
      for (int k = 0; k < M_MAX; k++) begin
        new_sys(k, $urandom_range(40, 1));
        released[k] = 0;
        rel_wait[k] = $urandom_range(300, 0);
      end
      left = 1;
      while (left) begin
        int k;
        left = 0;
        for (int j = 0; j < M_MAX; j++) if (sent[j] < rows[j]) left = 1;
        if (!left) break;
        if ($urandom_range(99, 0) < 20) begin
          in_valid = 0;
          @(negedge clk);
          continue;
        end
        do k = $urandom_range(M_MAX - 1, 0); while (sent[k] >= rows[k]);
        drive_row(k);
        #1;
        if (in_ready) sent[k]++;
        @(negedge clk);
        in_valid = 0;
      end
      // Offer a row on a thread that has finished but is not yet released:
      // it must be refused.
      for (int k = 0; k < M_MAX; k++) begin
        if (!released[k] && thread_busy[k] && !dut.active[k]) begin
          in_valid = 1; in_id = IDW'(k); in_last = 1;
          #1;
          checks++;
          n_busy_refused++;
          if (in_ready) begin failures++; $display("busy thread %0d accepted a row", k); end
          @(negedge clk);
          in_valid = 0;
          break;
        end
      end
      for (int k = 0; k < M_MAX; k++) while (!released[k]) @(negedge clk);
      repeat (3) @(negedge clk);
    end

    checks++;
    for (int k = 0; k < M_MAX; k++) if (ed[k].size() != 0) begin
      failures++; $display("id %0d: %0d rows missing", k, ed[k].size());
    end
    checks++;
    if (n_busy_refused == 0) begin failures++; $display("busy refusal never tested"); end
    checks++;
    if (thread_busy != 0) begin failures++; $display("threads still busy"); end
    $display("rows out=%0d busy refusals=%0d", n_out, n_busy_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
