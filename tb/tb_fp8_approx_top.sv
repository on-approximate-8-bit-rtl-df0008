// tb_fp8_approx_top: end-to-end test of the registered FP8 unit (no parameters to set).
//
// Every clock cycle a random format, operation, rounding mode and operand pair enters the
// unit; operands are mostly normal numbers (positive for the roots), with occasional raw
// words. Two rising edges later the general result, its supported flag and both combined
// multiplier outputs are compared with an exact-rounding reference. The testbench counts
// how often each mechanism of the design was exercised and counts a failure for any that
// never happened: every operation in both formats, every rounding mode, a carry-in of one
// and of zero, an unreachable mode flagged, a faithful result that is not the nearest one,
// a format change between consecutive operations, and the reset value.
module tb_fp8_approx_top;
  import fp8_pkg::*;
  import fp8_ref_pkg::*;

  localparam int N = 200000;

  logic       clk = 0, rst_n = 0;
  fmt_e       fmt = FMT_E5M2;
  op_e        op = OP_MUL;
  rmode_e     rm = RM_RNE;
  logic [7:0] x = '0, y = '0;
  logic [7:0] r, mul_rne, mul_rz;
  logic       r_supported;
  int         checks = 0, failures = 0;

  fp8_approx_top dut (.clk, .rst_n, .fmt, .op, .rm, .x, .y, .r, .r_supported, .mul_rne, .mul_rz);

  always #5 clk = ~clk;

  initial begin
    #((N + 100) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    fmt_e     f;
    op_e      o;
    rmode_e   m;
    bit [7:0] xx, yy;
    bit       sup;
    bit       ok;
    real      v;
    ref_t     rr;
    bit       mok;
    ref_t     mrne, mrz;
  } exp_t;

  exp_t q[$];

  int n_op[2][6];
  int n_rm[7];
  int n_cin1, n_cin0, n_unsup, n_faith_far, n_fmt_switch, n_reset;

  function automatic logic [7:0] rand_word(fmt_e f, bit positive);
    logic [7:0] v;
    if ($urandom_range(15) == 0) return 8'($urandom);
    do v = 8'($urandom); while (!is_normal(f, v));
    if (positive) v[7] = 1'b0;
    return v;
  endfunction

  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    fmt_e prev_f = FMT_E5M2;
    repeat (3) @(negedge clk);
    check("reset value", r == 8'h00 && mul_rne == 8'h00 && mul_rz == 8'h00 && !r_supported);
    n_reset++;
    rst_n = 1;
    for (int n = 0; n < N + 2; n++) begin
      if (q.size() == 2) begin
        exp_t e;
        e = q.pop_front();
        check("supported flag", r_supported == e.sup);
        if (e.sup && e.ok && e.rr.ok) begin
          check("general result", r == e.rr.acc0 || r == e.rr.acc1);
          if (r == int_expr(e.f, e.o, e.xx, e.yy) + 8'd1) n_cin1++;
          else n_cin0++;
          if (e.m == RM_FAITH && e.rr.acc0 != e.rr.acc1 &&
              r != round_ref(e.f, e.v, RM_RNE).acc0)
            n_faith_far++;
          if (r != e.rr.acc0 && r != e.rr.acc1 && failures < 10)
            $display("  f=%0d op=%0d rm=%0d x=%h y=%h r=%h want %h/%h",
                     e.f, e.o, e.m, e.xx, e.yy, r, e.rr.acc0, e.rr.acc1);
        end
        if (!e.sup) n_unsup++;
        if (e.mok && e.mrne.ok) begin
          check("multiplier RNe", mul_rne == e.mrne.acc0);
          check("multiplier RZ", mul_rz == e.mrz.acc0);
        end
      end
      if (n < N) begin
        exp_t e;
        real  v;
        e.f  = fmt_e'($urandom_range(1));
        e.o  = op_e'($urandom_range(5));
        e.m  = rmode_e'($urandom_range(6));
        e.xx = rand_word(e.f, e.o == OP_SQRT || e.o == OP_RSQRT);
        e.yy = rand_word(e.f, 1'b0);
        e.sup = reachable(e.f, e.o, e.m);
        v    = exact(e.f, e.o, e.xx, e.yy, e.ok);
        e.rr = round_ref(e.f, v, e.m);
        e.v  = v;
        v    = exact(e.f, OP_MUL, e.xx, e.yy, e.mok);
        e.mrne = round_ref(e.f, v, RM_RNE);
        e.mrz  = round_ref(e.f, v, RM_RZ);
        n_op[e.f][e.o]++;
        n_rm[e.m]++;
        if (n > 0 && e.f != prev_f) n_fmt_switch++;
        prev_f = e.f;
        fmt = e.f; op = e.o; rm = e.m; x = e.xx; y = e.yy;
        q.push_back(e);
      end
      @(negedge clk);
    end
    for (int f = 0; f < 2; f++)
      for (int o = 0; o < 6; o++)
        check($sformatf("coverage fmt %0d op %0d", f, o), n_op[f][o] > 0);
    for (int m = 0; m < 7; m++) check($sformatf("coverage rm %0d", m), n_rm[m] > 0);
    check("coverage carry-in 1", n_cin1 > 0);
    check("coverage carry-in 0", n_cin0 > 0);
    check("coverage unreachable mode", n_unsup > 0);
    check("coverage faithful off nearest", n_faith_far > 0);
    check("coverage format switch", n_fmt_switch > 0);
    check("coverage reset", n_reset > 0);
    $display("mechanisms: cin=1 %0d, cin=0 %0d, unreachable %0d, faithful-not-nearest %0d, format switches %0d, resets %0d",
             n_cin1, n_cin0, n_unsup, n_faith_far, n_fmt_switch, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
