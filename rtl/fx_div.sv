// fx_div: fully pipelined signed fixed-point divider, q = n / d.
//
// Operands and result are W-bit two's complement numbers with F fractional
// bits (Q2.30 by default).  The quotient is formed by radix-2 restoring
// division, one quotient bit per pipeline stage: the magnitude of n,
// shifted left by F, is divided by the magnitude of d over W-1+F stages
// (61 for Q2.30), and the sign is applied at the end.  A new division can
// start every clock; the result appears LAT cycles after the operands,
// where LAT must be at least W-1+F (extra cycles are plain registers).
// The default LAT of 61 is the published latency of the radix-2
// fixed-point divider; the published design used a vendor divider core
// whose insides are not given, so the stage structure here is this
// design's own.  Rounding is truncation toward zero; a quotient outside
// the W-bit range, including division by zero, saturates to +/-(2^(W-1)-1).
// The most negative input is treated as -(2^(W-1)-1).
module fx_div
  import thomas_pkg::*;
#(
  parameter int unsigned W   = DEF_W,
  parameter int unsigned F   = DEF_F,
  parameter int unsigned LAT = DEF_DIV_LAT
) (
  input  logic                clk,
  input  logic                en,
  input  logic signed [W-1:0] n,
  input  logic signed [W-1:0] d,
  output logic signed [W-1:0] q
);
  localparam int unsigned MW = W - 1;      // magnitude width
  localparam int unsigned QB = MW + F;     // quotient bits = pipeline stages
  localparam logic [MW-1:0] MAXMAG = {MW{1'b1}};

  initial assert (LAT >= QB) else $fatal(1, "fx_div: LAT must be >= W-1+F");

  function automatic logic [MW-1:0] mag(input logic signed [W-1:0] v);
    logic [W-1:0] a;
    a = v[W-1] ? W'(-v) : W'(v);
    return a[W-1] ? MAXMAG : a[MW-1:0];   // clamp the most negative value
  endfunction

  // Stage registers: partial remainder, the dividend bits still to be
  // consumed merged with the quotient bits already produced, the divisor
  // magnitude and the result sign.
  logic [MW:0]   rem_s [QB+1];
  logic [QB-1:0] nq_s  [QB+1];
  logic [MW-1:0] dm_s  [QB+1];
  logic          sg_s  [QB+1];

  always_comb begin
    rem_s[0] = '0;
    nq_s[0]  = {mag(n), {F{1'b0}}};
    dm_s[0]  = mag(d);
    sg_s[0]  = n[W-1] ^ d[W-1];
  end

  for (genvar i = 0; i < QB; i++) begin : g_stage
    logic [MW:0] trial;
    logic        ge;
    always_comb begin
      trial = {rem_s[i][MW-1:0], nq_s[i][QB-1]};
      ge    = (trial >= {1'b0, dm_s[i]});
    end
    always_ff @(posedge clk) begin
      if (en) begin
        rem_s[i+1] <= ge ? trial - {1'b0, dm_s[i]} : trial;
        nq_s[i+1]  <= {nq_s[i][QB-2:0], ge};
        dm_s[i+1]  <= dm_s[i];
        sg_s[i+1]  <= sg_s[i];
      end
    end
  end

  // Saturate the QB-bit quotient magnitude and apply the sign.
  logic [MW-1:0]       qmag;
  logic signed [W-1:0] qres;
  always_comb begin
    qmag = (nq_s[QB] > QB'(MAXMAG)) ? MAXMAG : nq_s[QB][MW-1:0];
    qres = sg_s[QB] ? -$signed({1'b0, qmag}) : $signed({1'b0, qmag});
  end

  delay_line #(.WIDTH(W), .LAT(LAT - QB)) u_pad (
    .clk(clk), .en(en), .d(qres), .q(q)
  );
endmodule
