// stack_array: one last-in first-out stack of {c/d, z/d} pairs per thread.
//
// The forward sweep produces rows 0..N in order and the backward sweep
// consumes them N..0, so a stack per system is all the addressing needed.
// Storage is a single M_MAX*N_MAX-entry memory of 2W-bit words; thread k
// owns entries k*N_MAX .. k*N_MAX+N_MAX-1 and a stack pointer sp[k].
// One push port (from the d-divider) and one pop port (to the backward
// core) work in the same cycle, on different threads.  A pop returns its
// word and the row index it was stored under (sp-1) on the next clock
// (registered read, as a block RAM); pop_row == 0 marks the bottom of the
// stack, i.e. row 0 of the system.  The outputs hold until the next pop.
// Capacity follows the published
// design (10 threads, 512 rows); the single shared memory is this design's.
module stack_array
  import thomas_pkg::*;
#(
  parameter int unsigned W     = DEF_W,
  parameter int unsigned M_MAX = DEF_M_MAX,
  parameter int unsigned N_MAX = DEF_N_MAX,
  localparam int unsigned IDW  = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned RW   = (N_MAX > 1) ? $clog2(N_MAX) : 1,
  localparam int unsigned SPW  = $clog2(N_MAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                push_valid,
  input  logic [IDW-1:0]      push_id,
  input  logic [2*W-1:0]      push_data,
  input  logic                pop_valid,
  input  logic [IDW-1:0]      pop_id,
  output logic [2*W-1:0]      pop_data,
  output logic [RW-1:0]       pop_row
);
  localparam int unsigned DEPTH_ALL = M_MAX * N_MAX;
  localparam int unsigned AW = $clog2(DEPTH_ALL);

  logic [2*W-1:0] mem [DEPTH_ALL];
  logic [SPW-1:0] sp  [M_MAX];

  logic [AW-1:0] waddr, raddr;
  always_comb begin
    waddr = AW'(push_id) * AW'(N_MAX) + AW'(sp[push_id]);
    raddr = AW'(pop_id)  * AW'(N_MAX) + AW'(sp[pop_id] - 1'b1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < M_MAX; k++) sp[k] <= '0;
    end else begin
      if (push_valid) sp[push_id] <= sp[push_id] + 1'b1;
      if (pop_valid)  sp[pop_id]  <= sp[pop_id] - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid) mem[waddr] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (pop_valid) begin
      pop_data <= mem[raddr];
      pop_row  <= RW'(sp[pop_id] - 1'b1);
    end
  end

  a_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push_valid |-> sp[push_id] < SPW'(N_MAX))
    else $error("stack_array: push into a full stack");
  a_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    pop_valid |-> sp[pop_id] != '0)
    else $error("stack_array: pop from an empty stack");
  a_same: assert property (@(posedge clk) disable iff (!rst_n)
    push_valid && pop_valid |-> push_id != pop_id)
    else $error("stack_array: push and pop on the same thread");
endmodule
