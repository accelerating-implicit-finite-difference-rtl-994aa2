// tb_sync_fifo: self-checking testbench of the synchronous FIFO.
//
// Random valid on the write side and random ready on the read side drive
// a default FIFO (16 x 8) and a 5-deep one (depth not a power of two).
// Every word read is compared with a queue model, as are count, the full
// condition (in_ready) and the empty condition (out_valid).  Counts how
// often each FIFO was seen full and empty, and fails if either never was.
module tb_sync_fifo;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;

  localparam int D1 = 16, D2 = 5;

  logic       iv1, ir1, ov1, or1, iv2, ir2, ov2, or2;
  logic [7:0] id1, od1, id2, od2;
  logic [$clog2(D1+1)-1:0] c1;
  logic [$clog2(D2+1)-1:0] c2;

  sync_fifo dut1 (.clk(clk), .rst_n(rst_n), .in_valid(iv1), .in_ready(ir1), .in_data(id1),
                  .out_valid(ov1), .out_ready(or1), .out_data(od1), .count(c1));
  sync_fifo #(.WIDTH(8), .DEPTH(D2)) dut2 (.clk(clk), .rst_n(rst_n), .in_valid(iv2), .in_ready(ir2),
                  .in_data(id2), .out_valid(ov2), .out_ready(or2), .out_data(od2), .count(c2));

  logic [7:0] m1 [$], m2 [$];
  bit st1 = 0, st2 = 0;
  int full1 = 0, full2 = 0, empty1 = 0, empty2 = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; iv1 = 0; iv2 = 0; or1 = 0; or2 = 0; id1 = 0; id2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare the model with the outputs before deciding this cycle
      chk(c1 == $bits(c1)'(m1.size()), "count1");
      chk(c2 == $bits(c2)'(m2.size()), "count2");
      chk(ir1 == (m1.size() < D1), "full1");
      chk(ir2 == (m2.size() < D2), "full2");
      chk(ov1 == (m1.size() > 0), "empty1");
      chk(ov2 == (m2.size() > 0), "empty2");
      if (m1.size() > 0) chk(od1 == m1[0], "data1");
      if (m2.size() > 0) chk(od2 == m2[0], "data2");
      if (m1.size() == D1) full1++;
      if (m2.size() == D2) full2++;
      if (m1.size() == 0) empty1++;
      if (m2.size() == 0) empty2++;
      // phases: mostly filling, mostly draining, balanced
      if (((cyc / 200) % 3) == 0) begin
        iv1 = ($urandom_range(3, 0) != 0); or1 = ($urandom_range(3, 0) == 0);
      end else if (((cyc / 200) % 3) == 1) begin
        iv1 = ($urandom_range(3, 0) == 0); or1 = ($urandom_range(3, 0) != 0);
      end else begin
        iv1 = $urandom_range(1, 0); or1 = $urandom_range(1, 0);
      end
      iv2 = $urandom_range(1, 0); or2 = $urandom_range(1, 0);
      // a stalled write must be held
      if (st1) iv1 = 1'b1; else id1 = 8'($urandom);
      if (st2) iv2 = 1'b1; else id2 = 8'($urandom);
      @(posedge clk);
      st1 = iv1 && !ir1;
      st2 = iv2 && !ir2;
      if (iv1 && ir1) m1.push_back(id1);
      if (iv2 && ir2) m2.push_back(id2);
      if (or1 && ov1) void'(m1.pop_front());
      if (or2 && ov2) void'(m2.pop_front());
    end
    chk(full1 > 0, "fifo1 never full");
    chk(full2 > 0, "fifo2 never full");
    chk(empty1 > 0, "fifo1 never empty");
    chk(empty2 > 0, "fifo2 never empty");
    $display("full1=%0d full2=%0d empty1=%0d empty2=%0d", full1, full2, empty1, empty2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
