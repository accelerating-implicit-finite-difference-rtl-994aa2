// sync_fifo: single-clock first-in first-out queue, first word fall through.
//
// Used three times in the solver: as the input queue and the output queue
// of the wrapper, which let the host write and read at its own pace, and
// as the problem queue that hands the id of a system whose forward sweep
// has finished over to the backward core.  Both sides use a valid/ready
// handshake: a word moves when valid and ready are both 1 at a clock edge.
// out_data shows the oldest word whenever out_valid is 1.  count is the
// number of words held.  A word written into an empty FIFO is visible on
// the next cycle.  Storage is a plain array (distributed RAM).
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  logic push, pop;
  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: data offered must stay put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> in_valid && $stable(in_data);
  endproperty
  a_hold: assert property (p_hold) else $error("sync_fifo: input changed while stalled");
endmodule
