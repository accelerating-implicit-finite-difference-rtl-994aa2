// tb_thomas_formats: the Thomas core at the two reduced fixed-point formats
// of the published latency table, Fixed[2,22] (W=24, F=22, divider 52
// cycles) and Fixed[2,14] (W=16, F=14, divider 36 cycles), side by side.
// Each runs the test of tb_format_run: a single 100-row Black-Scholes
// system with its latency checked against the cycle formula, then a block
// of 10 systems, every result compared bit for bit with the integer model
// of that format and, within a tolerance in units of the last place, with
// double precision.  The default Fixed[2,30] format is covered by
// tb_thomas_core and tb_thomas_wrapper.
module tb_thomas_formats;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int c22, f22, c14, f14;
  bit d22, d14;

  tb_format_run #(.W(24), .F(22), .DIV_LAT(52), .TOL_LSB(16)) u_22 (
    .clk(clk), .checks(c22), .failures(f22), .done(d22)
  );
  tb_format_run #(.W(16), .F(14), .DIV_LAT(36), .TOL_LSB(16)) u_14 (
    .clk(clk), .checks(c14), .failures(f14), .done(d14)
  );

  initial begin
    #2000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c22 + c14, f22 + f14 + 1);
    $finish;
  end

  initial begin
    wait (d22 && d14);
    checks = c22 + c14;
    failures = f22 + f14;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
