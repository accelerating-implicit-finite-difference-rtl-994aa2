// tb_fix2flt: self-checking testbench of the fixed-to-float converter.
//
// Random Q2.30 values with random magnitudes (so that both exact and
// rounded conversions occur, including ties) and the extremes are
// converted and compared with single-precision bit patterns built in
// double precision: exponent from the leading power of two, significand
// rounded to 24 bits, nearest with ties to even.
module tb_fix2flt;
  import tb_fx_ref::*;
  localparam int W = 32, F = 30;

  int checks = 0, failures = 0;
  logic signed [W-1:0] x;
  logic [31:0]         f;

  fix2flt #(.W(W), .F(F)) dut (.x(x), .f(f));

  function automatic logic [31:0] expect_fl(longint v);
    real    a, m, fr;
    longint k;
    int     e;
    bit     s;
    if (v == 0) return 32'h0;
    s = (v < 0);
    a = s ? -real'(v) : real'(v);
    a = a / (2.0 ** F);
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    m  = a * (2.0 ** (23 - e));        // significand scaled to 24 bits
    k  = longint'($floor(m));
    fr = m - real'(k);
    if (fr > 0.5 || (fr == 0.5 && k[0])) k++;
    if (k == (longint'(1) << 24)) begin k = k >> 1; e++; end
    return {s, 8'(e + 127), k[22:0]};
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      x = $urandom;
      x = x >>> $urandom_range(31, 0);
      if (i % 50 == 1) x = 32'sh8000_0000;
      if (i % 50 == 2) x = 32'sh7fff_ffff;
      if (i % 50 == 3) x = 0;
      if (i % 50 == 4) x = 32'sh0000_0180 << $urandom_range(20, 0);   // ties
      #1;
      checks++;
      if (f != expect_fl(longint'(x))) begin
        failures++;
        if (failures < 10) $display("fix2flt %0d: got %h expected %h", x, f, expect_fl(longint'(x)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
