// tb_d_divider: self-checking testbench of the d-divider (two Q2.30
// dividers side by side, latency 61).  Random rows (d, z, c, id, last),
// offered in random cycles, must come out exactly 61 cycles later as
// c/d and z/d, equal bit for bit to the integer model of the divider, with
// id and last unchanged.  d values include small and zero divisors, which
// saturate.
module tb_d_divider;
  import tb_fx_ref::*;

  localparam int W = 32, F = 30, LAT = 61, IDW = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  logic                in_valid, in_last, out_valid, out_last;
  logic signed [W-1:0] in_d, in_z, in_c, out_cd, out_zd;
  logic [IDW-1:0]      in_id, out_id;

  d_divider #(.IDW(IDW)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_d(in_d), .in_z(in_z), .in_c(in_c),
    .in_id(in_id), .in_last(in_last), .out_valid(out_valid), .out_cd(out_cd),
    .out_zd(out_zd), .out_id(out_id), .out_last(out_last)
  );

  initial begin
    #2000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  typedef struct {
    longint cd, zd;
    int id;
    bit last;
    longint unsigned due;
  } exp_t;
  exp_t q [$];

  function automatic longint rval(int mode);
    logic [31:0] v;
    v = $urandom;
    case (mode)
      0: return longint'($signed(v));
      1: return longint'($signed(v >>> 3));
      2: return 0;
      3: return longint'($urandom_range(1000, 1));
      default: return to_fx(1.0 + 0.9 * real'($urandom) / 4294967295.0, F);
    endcase
  endfunction

  int n_out = 0;
  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      if (q.size() != 0 && q[0].due == cycle) begin
        checks++;
        if (!out_valid || longint'(out_cd) != q[0].cd || longint'(out_zd) != q[0].zd ||
            int'(out_id) != q[0].id || out_last != q[0].last) begin
          failures++;
          if (failures < 10) $display("cycle %0d: v=%0d cd=%0d/%0d zd=%0d/%0d", cycle,
                                      out_valid, out_cd, q[0].cd, out_zd, q[0].zd);
        end
        void'(q.pop_front());
        n_out++;
      end else if (out_valid) begin
        checks++; failures++;
        $display("cycle %0d: unexpected output", cycle);
      end
    end
  end

  initial begin
    in_valid = 0; in_d = 0; in_z = 0; in_c = 0; in_id = 0; in_last = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      exp_t e;
      longint d, z, c;
      in_valid = ($urandom_range(99, 0) < 70);
      d = rval($urandom_range(8, 0) == 0 ? $urandom_range(3, 0) : 4);
      z = rval($urandom_range(1, 0));
      c = rval($urandom_range(1, 0));
      in_d = W'(d); in_z = W'(z); in_c = W'(c);
      in_id = IDW'($urandom_range(9, 0)); in_last = $urandom_range(1, 0);
      if (in_valid) begin
        e.cd = ref_div(c, d, W, F); e.zd = ref_div(z, d, W, F);
        e.id = int'(in_id); e.last = in_last;
        e.due = cycle + LAT;   // sampled after the edge that takes it, LAT edges later
        q.push_back(e);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("results=%0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
