// tb_thomas_backward: self-checking testbench of the backward-substitution
// core at its default parameters (Q2.30, 10 threads, 512 rows, multiplier
// 6 + subtractor 2 = C_B = 8 time slots).  A stack_array instance holds the
// (c/d, z/d) pairs, which the testbench pushes directly; the problem queue
// is played by the testbench.
//
// Phase 1: one system of 30 rows with en held high; results must leave
// exactly C_B = 8 cycles apart, last row first, and the release must
// come with row 0.
// Phase 2: systems of random sizes loaded into all 10 threads and queued
// at once, so two wait for a time slot (q_wait counted), with en dropped
// at random (freeze counted).  New systems are loaded into threads that
// have been released while others are still being solved.  Finally a
// full 512-row system is solved.  Every x_n is
// compared bit for bit with the integer model.
module tb_thomas_backward;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, M_MAX = 10, N_MAX = 512, IDW = 4, RW = 9, CB = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  logic                en, q_valid, q_ready, q_wait;
  logic [IDW-1:0]      q_id, pop_id, out_id, release_id, push_id;
  logic                pop_valid, push_valid, out_valid, out_last, release_valid;
  logic [2*W-1:0]      pop_data, push_data;
  logic [RW-1:0]       pop_row, out_row;
  logic signed [W-1:0] out_x;

  thomas_backward dut (
    .clk(clk), .rst_n(rst_n), .en(en), .q_valid(q_valid), .q_ready(q_ready), .q_id(q_id),
    .pop_valid(pop_valid), .pop_id(pop_id), .pop_data(pop_data), .pop_row(pop_row),
    .out_valid(out_valid), .out_x(out_x), .out_id(out_id), .out_row(out_row),
    .out_last(out_last), .release_valid(release_valid), .release_id(release_id),
    .q_wait(q_wait)
  );

  stack_array u_stack (
    .clk(clk), .rst_n(rst_n), .push_valid(push_valid), .push_id(push_id),
    .push_data(push_data), .pop_valid(pop_valid), .pop_id(pop_id),
    .pop_data(pop_data), .pop_row(pop_row)
  );

  initial begin
    #20000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  longint ex [M_MAX][];     // expected x per thread
  int     next_row [M_MAX];
  bit     busy [M_MAX];      // loaded, queued or being solved
  int     qlist [$];
  int     en_pct = 100;
  int     n_out = 0, n_qwait = 0, n_freeze = 0, n_sys = 0;
  bit     check_period = 0;
  longint unsigned last_out_cycle;

  function automatic longint rfx(real lo, real hi);
    return to_fx(lo + (hi - lo) * real'($urandom) / 4294967295.0, F);
  endfunction

  // Push a random system into thread id, one row per cycle, then queue it.
  task automatic load(int id, int n);
    longint cd[], zd[];
    cd = new[n]; zd = new[n]; ex[id] = new[n];
    for (int i = 0; i < n; i++) begin
      cd[i] = rfx(-0.25, 0.25);   // nonzero on the last row too: x_{N+1} must be 0
      zd[i] = rfx(-0.6, 0.6);
    end
    for (int i = n - 1; i >= 0; i--)
      ex[id][i] = ref_sub(zd[i], ref_mul(cd[i], (i == n - 1) ? 0 : ex[id][i+1], W, F), W);
    busy[id] = 1;
    next_row[id] = n - 1;
    for (int i = 0; i < n; i++) begin
      push_valid = 1; push_id = IDW'(id); push_data = {W'(cd[i]), W'(zd[i])};
      @(negedge clk);
    end
    push_valid = 0;
    qlist.push_back(id);
  endtask

  // problem queue and enable, driven after each falling edge
  always @(negedge clk) begin
    en = ($urandom_range(99, 0) < en_pct);
    q_valid = (qlist.size() != 0);
    q_id = q_valid ? IDW'(qlist[0]) : '0;
    #1;
    if (rst_n && q_valid && q_ready) void'(qlist.pop_front());
  end

  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      if (q_wait) n_qwait++;
      if (!en && dut.slot_busy != 0) n_freeze++;
    end
    if (rst_n && out_valid) begin
      int id;
      id = int'(out_id);
      n_out++;
      checks++;
      if (!busy[id] || int'(out_row) != next_row[id]) begin
        failures++;
        if (failures < 10) $display("id %0d: row %0d, expected %0d", id, out_row, next_row[id]);
      end else if (longint'(out_x) != ex[id][out_row]) begin
        failures++;
        if (failures < 10) $display("id %0d row %0d: x=%0d model %0d", id, out_row, out_x, ex[id][out_row]);
      end
      if (check_period && next_row[id] != ex[id].size() - 1) begin
        checks++;
        if (cycle - last_out_cycle != CB) begin
          failures++; $display("row period %0d, expected %0d", cycle - last_out_cycle, CB);
        end
      end
      last_out_cycle = cycle;
      checks++;
      if (release_valid != (out_row == 0) || out_last != (out_row == 0) ||
          (release_valid && release_id != out_id)) begin
        failures++; $display("id %0d: bad release/last at row %0d", id, out_row);
      end
      next_row[id]--;
      if (out_row == 0) begin
        busy[id] = 0;
        n_sys++;
      end
    end else if (rst_n && release_valid) begin
      checks++; failures++; $display("release without result");
    end
  end

  task automatic wait_idle();
    bit any;
    do begin
      @(negedge clk);
      any = 0;
      for (int k = 0; k < M_MAX; k++) if (busy[k]) any = 1;
    end while (any);
  endtask

  initial begin
    push_valid = 0; push_id = 0; push_data = 0;
    for (int k = 0; k < M_MAX; k++) busy[k] = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- phase 1 ----
    check_period = 1;
    load(4, 30);
    wait_idle();
    check_period = 0;

    // ---- phase 2 ----
    en_pct = 80;
    for (int k = 0; k < M_MAX; k++) load(k, $urandom_range(60, 1));
    repeat (4) begin
      for (int j = 0; j < 40; j++) begin
        int k;
        k = $urandom_range(M_MAX - 1, 0);
        if (!busy[k]) load(k, $urandom_range(60, 1));
        else @(negedge clk);
      end
    end
    wait_idle();
    // a full 512-row system next to a short one
    load(9, N_MAX);
    load(0, 20);
    wait_idle();

    checks += 2;
    if (n_qwait == 0)  begin failures++; $display("no queue wait seen"); end
    if (n_freeze == 0) begin failures++; $display("no freeze seen"); end
    $display("results=%0d systems=%0d queue_waits=%0d freezes=%0d", n_out, n_sys, n_qwait, n_freeze);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
