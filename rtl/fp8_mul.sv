// fp8_mul: approximate FP8 multiplier, X + Y - B + cin on one 8-bit adder.
//
// The multipliers of the hardware study: a dedicated E5M2 or E4M3 unit, or a combined
// unit that serves both formats with one adder and a format select `fmt`. The rounding
// mode is fixed at elaboration (parameter RM); the study builds RNe and RZ. For E5M2, RZ
// needs no carry-in at all, and RNe a 4-literal term of the mantissa bits; for E4M3 both
// need the larger sums of products of fp8_cin_e4m3. In the combined unit the constant
// (0xc4 or 0xc8) and the carry-in are selected by `fmt`; the paper reports this shared
// adder to be cheaper than multiplexing two dedicated units.
//
// Operands are normal numbers; no zero/infinity/NaN handling, as in the paper. `fmt` is
// ignored unless VARIANT is MUL_COMBINED. RM must be a mode the chosen format supports
// (E4M3: not RU or RD). Purely combinational.
module fp8_mul
  import fp8_pkg::*;
#(
  parameter mul_variant_e VARIANT = MUL_COMBINED,
  parameter rmode_e       RM      = RM_RNE
) (
  input  fmt_e       fmt,  // format of x, y and r (combined variant only)
  input  logic [7:0] x,
  input  logic [7:0] y,
  output logic [7:0] r
);

  logic cin_e5, cin_e4, sup_e5, sup_e4;
  fmt_e f;

  always_comb begin
    unique case (VARIANT)
      MUL_E5M2: f = FMT_E5M2;
      MUL_E4M3: f = FMT_E4M3;
      default:  f = fmt;
    endcase
  end

  fp8_cin_e5m2 u_cin_e5m2 (.x, .y, .op(OP_MUL), .rm(RM), .cin(cin_e5), .supported(sup_e5));
  fp8_cin_e4m3 u_cin_e4m3 (.x, .y, .op(OP_MUL), .rm(RM), .cin(cin_e4), .supported(sup_e4));

  logic       cin;
  logic [7:0] k;
  assign cin = (f == FMT_E5M2) ? cin_e5 : cin_e4;
  assign k   = (f == FMT_E5M2) ? B_E5M2 : B_E4M3;
  assign r   = x + y - k + {7'd0, cin};

  // RM must be a mode the selected format reaches with a carry-in (no RU/RD for E4M3).
  always_comb begin
    assert (((f == FMT_E5M2) ? sup_e5 : sup_e4) == 1'b1)
      else $error("fp8_mul: rounding mode not available for this format");
  end

endmodule
