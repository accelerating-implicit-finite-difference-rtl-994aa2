// delay_line: LAT-stage shift register with a common advance enable.
//
// Carries side-band data (ids, flags, operands waiting for a slower unit)
// alongside an arithmetic pipeline so that both arrive together.  With
// LAT = 0 the output is the input.  Every stage moves only when en is 1,
// so a frozen pipeline keeps its contents.  No reset: the valid bits that
// need one are carried in a separately reset delay line by the user.
// Lint reports clk and en unused for instances with LAT = 0 (the divider
// needs no extra delay when its latency equals its W-1+F stages); they are
// used whenever LAT > 0.
module delay_line #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned LAT   = 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (LAT == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [LAT];
    always_ff @(posedge clk) begin
      if (en) begin
        stage[0] <= d;
        for (int i = 1; i < LAT; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[LAT-1];
  end
endmodule
