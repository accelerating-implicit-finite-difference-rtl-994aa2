// tb_fx_div: self-checking testbench of the pipelined fixed-point divider.
//
// Feeds one random operand pair per clock (a mix of in-range quotients,
// overflowing quotients, zero and extreme divisors) into the Q2.30 divider
// with its default latency of 61 and compares every result, exactly LAT
// cycles later, with a 64-bit integer model.  A second instance in Q2.14
// with latency 36 checks the parameterisation.  en is dropped at random
// to check that the pipeline freezes as a whole.
module tb_fx_div;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, LAT = 61;
  localparam int W2 = 16, F2 = 14, LAT2 = 36;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic en;
  logic signed [W-1:0]  n, d, q;
  logic signed [W2-1:0] n2, d2, q2;

  fx_div #(.W(W), .F(F), .LAT(LAT)) dut (.clk(clk), .en(en), .n(n), .d(d), .q(q));
  fx_div #(.W(W2), .F(F2), .LAT(LAT2)) dut2 (.clk(clk), .en(en), .n(n2), .d(d2), .q(q2));

  longint exp1 [$], exp2 [$];
  int     age1 [$], age2 [$];

  function automatic logic [31:0] rnd_val(int w, int mode);
    logic [31:0] v;
    v = $urandom;
    case (mode)
      0: v = v >> (32 - w);                       // full range
      1: v = v >> (32 - w + 2);                   // small
      2: v = 32'(1) << (w - 2);                   // 1.0
      3: v = 0;
      4: v = 32'(1) << (w - 1);                   // most negative
      default: v = v >> (32 - w + 1);
    endcase
    if ($urandom_range(1, 0) == 1) v = -v;
    return v;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc;
  initial begin
    en = 1; n = 0; d = 32'sh4000_0000; n2 = 0; d2 = 16'sh4000;
    // flush the pipeline with known operands before checking
    repeat (LAT + 2) @(posedge clk);
    for (cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      en = ($urandom_range(9, 0) != 0);
      n  = rnd_val(W, $urandom_range(5, 0));
      d  = rnd_val(W, (cyc % 97 == 0) ? 3 : $urandom_range(5, 0));
      n2 = W2'(rnd_val(W2, $urandom_range(5, 0)));
      d2 = W2'(rnd_val(W2, (cyc % 89 == 0) ? 3 : $urandom_range(5, 0)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: on every enabled edge, push the expected result and age
  // all pending ones; the one of age LAT must be on q now
  always @(posedge clk) begin
    if (en) begin
      exp1.push_back(ref_div(longint'(n), longint'(d), W, F));
      age1.push_back(0);
      exp2.push_back(ref_div(longint'(n2), longint'(d2), W2, F2));
      age2.push_back(0);
      foreach (age1[i]) age1[i]++;
      foreach (age2[i]) age2[i]++;
    end
  end

  always @(negedge clk) begin
    if (age1.size() > 0 && age1[0] == LAT) begin
      checks++;
      if (longint'(q) != exp1[0]) begin
        failures++;
        if (failures < 10) $display("div32 mismatch: got %0d expected %0d", q, exp1[0]);
      end
      void'(exp1.pop_front()); void'(age1.pop_front());
    end
    if (age2.size() > 0 && age2[0] == LAT2) begin
      checks++;
      if (longint'(q2) != exp2[0]) begin
        failures++;
        if (failures < 10) $display("div16 mismatch: got %0d expected %0d", q2, exp2[0]);
      end
      void'(exp2.pop_front()); void'(age2.pop_front());
    end
  end
endmodule
