// tb_flt2fix: self-checking testbench of the float-to-fixed converter.
//
// Random single-precision bit patterns, most with exponents near the Q2.30
// range and some special (zero, subnormal, infinity, NaN, large), are
// converted and compared with a value computed in double precision from
// sign, exponent and fraction: v * 2^30 rounded half away from zero and
// clamped to +/-(2^31-1).
module tb_flt2fix;
  import tb_fx_ref::*;
  localparam int W = 32, F = 30;

  int checks = 0, failures = 0;
  logic [31:0]         f;
  logic signed [W-1:0] x;

  flt2fix #(.W(W), .F(F)) dut (.f(f), .x(x));

  function automatic longint expect_fx(logic [31:0] v);
    real    val;
    longint r, mx;
    int     e;
    mx = fx_max(W);
    e  = int'(v[30:23]);
    if (e == 0) return 0;
    if (e == 255) return v[31] ? -mx : mx;
    val = (1.0 + real'(v[22:0]) / (2.0 ** 23)) * (2.0 ** (e - 127));
    if (val * (2.0 ** F) >= real'(mx)) r = mx;
    else r = longint'($floor(val * (2.0 ** F) + 0.5));
    if (r > mx) r = mx;
    return v[31] ? -r : r;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      f = $urandom;
      case (i % 10)
        0, 1, 2, 3, 4, 5: f[30:23] = 8'(100 + $urandom_range(28, 0));   // 2^-27 .. 2^1
        6: f[30:23] = 8'(60 + $urandom_range(40, 0));                    // tiny
        7: f[30:23] = 8'(128 + $urandom_range(126, 0));                  // large
        8: f[30:23] = (i % 20 == 8) ? 8'd0 : 8'd255;
        default: ;
      endcase
      #1;
      checks++;
      if (longint'(x) != expect_fx(f)) begin
        failures++;
        if (failures < 10) $display("flt2fix %h: got %0d expected %0d", f, x, expect_fx(f));
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
