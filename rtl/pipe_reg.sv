// pipe_reg: one-entry valid/ready pipeline register.
//
// Holds one word between a producer and a consumer.  It accepts a new word
// when it is empty or when its word is being taken in the same cycle, so
// it sustains one word per clock.  Used by the wrapper to register the
// output of the number format converters.  Synchronous active-low reset.
module pipe_reg #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) out_data <= in_data;
  end
endmodule
