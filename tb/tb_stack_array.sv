// tb_stack_array: self-checking testbench of the per-thread LIFO store at
// full size (10 threads x 512 rows of 64 bits).  A model keeps one queue
// per thread.  Phase 1 fills thread 7 to its 512-row capacity and empties
// it again.  Phase 2 issues random pushes and pops on all threads in the
// same cycles (never push and pop on the same thread, as in the core).
// Each pop must return, one cycle later, the most recently pushed word of
// that thread and its row index (stack depth - 1).
module tb_stack_array;
  localparam int W = 32, M_MAX = 10, N_MAX = 512, IDW = 4, RW = 9;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0;

  logic               push_valid, pop_valid;
  logic [IDW-1:0]     push_id, pop_id;
  logic [2*W-1:0]     push_data, pop_data;
  logic [RW-1:0]      pop_row;

  stack_array dut (
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

  logic [2*W-1:0] model [M_MAX][$];
  bit             exp_v;
  logic [2*W-1:0] exp_d;
  int             exp_row;
  int             n_pops = 0, n_full = 0;

  // Drive one cycle: inputs after the falling edge, the pop result is
  // checked after the next falling edge.
  task automatic step(bit pu, int pid, bit po, int oid);
    push_valid = pu; push_id = IDW'(pid); push_data = {$urandom, $urandom};
    pop_valid = po;  pop_id = IDW'(oid);
    if (po) begin
      exp_d = model[oid][$];
      exp_row = model[oid].size() - 1;
      void'(model[oid].pop_back());
    end
    if (pu) model[pid].push_back(push_data);
    if (pu && model[pid].size() == N_MAX) n_full++;
    exp_v = po;
    @(negedge clk);
    if (exp_v) begin
      checks++;
      n_pops++;
      if (pop_data != exp_d || int'(pop_row) != exp_row) begin
        failures++;
        if (failures < 10) $display("pop: data %h/%h row %0d/%0d", pop_data, exp_d, pop_row, exp_row);
      end
    end
  endtask

  initial begin
    push_valid = 0; pop_valid = 0; push_id = 0; pop_id = 0; push_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int i = 0; i < N_MAX; i++) step(1, 7, 0, 0);
    for (int i = 0; i < N_MAX; i++) step(0, 0, 1, 7);

    for (int i = 0; i < 60000; i++) begin
      bit pu, po;
      int pid, oid;
      pid = $urandom_range(M_MAX - 1, 0);
      oid = $urandom_range(M_MAX - 1, 0);
      pu = ($urandom_range(99, 0) < 55) && model[pid].size() < N_MAX;
      po = ($urandom_range(99, 0) < 50) && model[oid].size() > 0 && !(pu && pid == oid);
      step(pu, pid, po, oid);
    end
    while (1) begin
      int k;
      k = -1;
      for (int j = 0; j < M_MAX; j++) if (model[j].size() > 0) k = j;
      if (k < 0) break;
      step(0, 0, 1, k);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("no stack was ever full"); end
    $display("pops=%0d full=%0d", n_pops, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
