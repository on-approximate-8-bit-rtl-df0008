// tb_fp8_mul: exhaustive check of the six multiplier variants of the hardware study.
//
// Instantiates fp8_mul as dedicated E5M2 and E4M3 units and as the combined unit, each
// with RNe and with RZ, and applies every pair of operand words (and both formats to the
// combined units). Every product of two normal numbers that is itself normal must equal
// the correctly rounded exact product. Combinational block: one #1 step per vector.
module tb_fp8_mul;
  import fp8_pkg::*;
  import fp8_ref_pkg::*;

  fmt_e       fmt;
  logic [7:0] x, y;
  logic [7:0] r_e5_rne, r_e5_rz, r_e4_rne, r_e4_rz, r_c_rne, r_c_rz;
  int         checks = 0, failures = 0;

  fp8_mul #(.VARIANT(MUL_E5M2),     .RM(RM_RNE)) u_e5_rne (.fmt, .x, .y, .r(r_e5_rne));
  fp8_mul #(.VARIANT(MUL_E5M2),     .RM(RM_RZ))  u_e5_rz  (.fmt, .x, .y, .r(r_e5_rz));
  fp8_mul #(.VARIANT(MUL_E4M3),     .RM(RM_RNE)) u_e4_rne (.fmt, .x, .y, .r(r_e4_rne));
  fp8_mul #(.VARIANT(MUL_E4M3),     .RM(RM_RZ))  u_e4_rz  (.fmt, .x, .y, .r(r_e4_rz));
  fp8_mul #(.VARIANT(MUL_COMBINED), .RM(RM_RNE)) u_c_rne  (.fmt, .x, .y, .r(r_c_rne));
  fp8_mul #(.VARIANT(MUL_COMBINED), .RM(RM_RZ))  u_c_rz   (.fmt, .x, .y, .r(r_c_rz));

  task automatic expect_eq(string name, logic [7:0] got, logic [7:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s fmt=%0d x=%h y=%h got %h want %h", name, fmt, x, y, got, want);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int xi = 0; xi < 256; xi++)
        for (int yi = 0; yi < 256; yi++) begin
          bit   ok;
          real  v;
          ref_t rne, rz;
          fmt = fmt_e'(f);
          x   = 8'(xi);
          y   = 8'(yi);
          #1;
          v = exact(fmt, OP_MUL, x, y, ok);
          if (!ok) continue;
          rne = round_ref(fmt, v, RM_RNE);
          rz  = round_ref(fmt, v, RM_RZ);
          if (!rne.ok) continue;
          if (fmt == FMT_E5M2) begin
            expect_eq("e5m2 RNe", r_e5_rne, rne.acc0);
            expect_eq("e5m2 RZ",  r_e5_rz,  rz.acc0);
          end else begin
            expect_eq("e4m3 RNe", r_e4_rne, rne.acc0);
            expect_eq("e4m3 RZ",  r_e4_rz,  rz.acc0);
          end
          expect_eq("combined RNe", r_c_rne, rne.acc0);
          expect_eq("combined RZ",  r_c_rz,  rz.acc0);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
