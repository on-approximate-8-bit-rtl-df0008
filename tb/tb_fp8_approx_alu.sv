// tb_fp8_approx_alu: exhaustive check of the shared-adder FP8 unit against exact rounding.
//
// For both formats, all six operations and all seven rounding modes, every operand word
// (every pair for mul and div) is applied; the result must be one of the encodings the
// mode accepts for the exact result, and the supported flag must match the summary
// tables. Operands that are not normal numbers and results outside the normal range are
// not compared. Combinational block: one #1 step per vector.
module tb_fp8_approx_alu;
  import fp8_pkg::*;
  import fp8_ref_pkg::*;

  fmt_e       fmt;
  op_e        op;
  rmode_e     rm;
  logic [7:0] x, y, r;
  logic       supported;
  int         checks = 0, failures = 0;

  fp8_approx_alu dut (.fmt, .op, .rm, .x, .y, .r, .supported);

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int o = 0; o < 6; o++)
        for (int xi = 0; xi < 256; xi++)
          for (int yi = 0; yi < ((o == OP_MUL || o == OP_DIV) ? 256 : 1); yi++) begin
            bit  ok;
            real v;
            v = exact(fmt_e'(f), op_e'(o), 8'(xi), 8'(yi), ok);
            for (int m = 0; m < 7; m++) begin
              ref_t rr;
              fmt = fmt_e'(f);
              op  = op_e'(o);
              rm  = rmode_e'(m);
              x   = 8'(xi);
              y   = 8'(yi);
              #1;
              checks++;
              if (supported !== reachable(fmt, op, rm)) begin
                failures++;
                if (failures < 10) $display("FAIL supported f=%0d op=%0d rm=%0d", f, o, m);
              end
              if (!ok || !supported) continue;
              rr = round_ref(fmt, v, rm);
              if (!rr.ok) continue;
              checks++;
              if (r !== rr.acc0 && r !== rr.acc1) begin
                failures++;
                if (failures < 10)
                  $display("FAIL f=%0d op=%0d rm=%0d x=%h y=%h r=%h want %h/%h",
                           f, o, m, x, y, r, rr.acc0, rr.acc1);
              end
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
