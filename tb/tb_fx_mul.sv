// tb_fx_mul: self-checking testbench of the pipelined fixed-point
// multiplier (Q2.30, latency 6): random operands, including the extremes
// that saturate, are checked against a 64-bit integer model exactly LAT
// enabled cycles later.  en is dropped at random to check that the
// pipeline freezes.
module tb_fx_mul;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, LAT = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic en;
  logic signed [W-1:0] a, b, r;

  fx_mul #(.W(W), .F(F), .LAT(LAT)) dut (.clk(clk), .en(en), .a(a), .b(b), .p(r));

  longint expq [$];
  int     age  [$];

  function automatic logic [31:0] rnd_val(int mode);
    logic [31:0] v;
    v = $urandom;
    case (mode)
      0: v = v;
      1: v = v >> 2;
      2: v = 32'h8000_0000;
      3: v = 32'h7fff_ffff;
      default: v = v >> 1;
    endcase
    if (mode < 2 && $urandom_range(1, 0) == 1) v = -v;
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; a = 0; b = 0;
    repeat (LAT + 2) @(posedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      en = ($urandom_range(9, 0) != 0);
      a  = rnd_val($urandom_range(4, 0));
      b  = rnd_val($urandom_range(4, 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (en) begin
      expq.push_back(ref_mul(longint'(a), longint'(b), W, F));
      age.push_back(0);
      foreach (age[i]) age[i]++;
    end
  end

  always @(negedge clk) begin
    if (age.size() > 0 && age[0] == LAT) begin
      checks++;
      if (longint'(r) != expq[0]) begin
        failures++;
        if (failures < 10) $display("mismatch: got %0d expected %0d", r, expq[0]);
      end
      void'(expq.pop_front()); void'(age.pop_front());
    end
  end
endmodule
