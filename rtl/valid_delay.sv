// valid_delay: LAT-stage shift register for a single valid bit, cleared by
// a synchronous active-low reset.  Used next to delay_line so that the
// pipeline never reports stale data after reset.  Advances only when en.
module valid_delay #(
  parameter int unsigned LAT = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic d,
  output logic q
);
  if (LAT == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [LAT:0] stage;          // stage[0] is the input
    assign stage[0] = d;
    for (genvar i = 1; i <= LAT; i++) begin : g_stage
      always_ff @(posedge clk) begin
        if (!rst_n)  stage[i] <= 1'b0;
        else if (en) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[LAT];
  end
endmodule
