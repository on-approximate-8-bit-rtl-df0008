// tb_fp8_mul_reg: timing and function of the registered multiplier.
//
// A combined RNe unit (the default) and a dedicated E4M3 RZ unit are fed a new random pair
// of normal operands, in a random format, every clock cycle. Each product must appear
// exactly two rising edges after its operands were applied, one product per cycle, equal
// to the correctly rounded exact product. The reset value (zero) is checked as well.
module tb_fp8_mul_reg;
  import fp8_pkg::*;
  import fp8_ref_pkg::*;

  localparam int N = 20000;

  logic       clk = 0, rst_n = 0;
  fmt_e       fmt = FMT_E5M2;
  logic [7:0] x = '0, y = '0;
  logic [7:0] r_c, r_e4;
  int         checks = 0, failures = 0;

  fp8_mul_reg dut (.clk, .rst_n, .fmt, .x, .y, .r(r_c));
  fp8_mul_reg #(.VARIANT(MUL_E4M3), .RM(RM_RZ)) dut_e4 (.clk, .rst_n, .fmt(FMT_E5M2), .x, .y, .r(r_e4));

  always #5 clk = ~clk;

  initial begin
    #((N + 100) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rand_normal(fmt_e f);
    logic [7:0] v;
    do v = 8'($urandom); while (!is_normal(f, v));
    return v;
  endfunction

  // expected results, index = cycle in which the operands were applied
  bit       exp_ok_c[N], exp_ok_e4[N];
  bit [7:0] exp_c[N], exp_e4[N];

  initial begin
    repeat (3) @(negedge clk);
    checks++;
    if (r_c !== 8'h00 || r_e4 !== 8'h00) begin failures++; $display("FAIL reset value"); end
    rst_n = 1;
    for (int n = 0; n < N + 2; n++) begin
      if (n >= 2) begin
        if (exp_ok_c[n-2]) begin
          checks++;
          if (r_c !== exp_c[n-2]) begin
            failures++;
            if (failures < 10) $display("FAIL combined cycle %0d got %h want %h", n, r_c, exp_c[n-2]);
          end
        end
        if (exp_ok_e4[n-2]) begin
          checks++;
          if (r_e4 !== exp_e4[n-2]) begin
            failures++;
            if (failures < 10) $display("FAIL e4m3 cycle %0d got %h want %h", n, r_e4, exp_e4[n-2]);
          end
        end
      end
      if (n < N) begin
        bit   ok;
        ref_t rr;
        real  v;
        fmt = fmt_e'($urandom_range(1));
        x   = rand_normal(fmt);
        y   = rand_normal(fmt);
        // combined unit in the chosen format
        rr = round_ref(fmt, exact(fmt, OP_MUL, x, y, ok), RM_RNE);
        exp_ok_c[n] = ok && rr.ok;
        exp_c[n]    = rr.acc0;
        // dedicated E4M3 unit sees the same words as E4M3
        v  = exact(FMT_E4M3, OP_MUL, x, y, ok);
        rr = round_ref(FMT_E4M3, v, RM_RZ);
        exp_ok_e4[n] = ok && rr.ok;
        exp_e4[n]    = rr.acc0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
