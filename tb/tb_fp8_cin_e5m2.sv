// tb_fp8_cin_e5m2: exhaustive check of the E5M2 carry-in terms against exact rounding.
//
// For every operation, rounding mode and operand pair (all 256 x 256 words for the two
// binary operations, all 256 for the unary ones) the testbench forms the integer
// expression from its own copy of the constants, adds the carry-in of the block, and
// compares with the encodings the rounding mode accepts for the exact result. Operands that
// are not normal numbers and results outside the normal range are skipped. It also checks
// the supported flag against the summary table (with RU/RD/RZ gaps) for every pair.
// Purely combinational block: one #1 step per vector.
module tb_fp8_cin_e5m2;
  import fp8_pkg::*;
  import fp8_ref_pkg::*;

  logic [7:0] x, y;
  op_e        op;
  rmode_e     rm;
  logic       cin, supported;
  int         checks = 0, failures = 0, skipped = 0;

  fp8_cin_e5m2 dut (.x, .y, .op, .rm, .cin, .supported);

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 6; o++) begin
      for (int xi = 0; xi < 256; xi++) begin
        for (int yi = 0; yi < ((o == OP_MUL || o == OP_DIV) ? 256 : 1); yi++) begin
          bit   ok;
          real  v;
          v = exact(FMT_E5M2, op_e'(o), 8'(xi), 8'(yi), ok);
          for (int m = 0; m < 7; m++) begin
            ref_t rr;
            x  = 8'(xi);
            y  = 8'(yi);
            op = op_e'(o);
            rm = rmode_e'(m);
            #1;
            checks++;
            if (supported !== reachable(FMT_E5M2, op, rm)) begin
              failures++;
              if (failures < 10) $display("FAIL supported op=%0d rm=%0d", o, m);
            end
            if (!ok || !reachable(FMT_E5M2, op, rm)) continue;
            rr = round_ref(FMT_E5M2, v, rm);
            if (!rr.ok) begin skipped++; continue; end
            begin
              logic [7:0] r;
              r = int_expr(FMT_E5M2, op, x, y) + {7'd0, cin};
              checks++;
              if (r != rr.acc0 && r != rr.acc1) begin
                failures++;
                if (failures < 10)
                  $display("FAIL op=%0d rm=%0d x=%h y=%h got %h want %h/%h", o, m, x, y, r, rr.acc0, rr.acc1);
              end
            end
          end
        end
      end
    end
    $display("skipped (out of normal range) %0d", skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
