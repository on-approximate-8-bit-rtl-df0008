// fp8_mul_reg: fp8_mul between an input and an output register, as in the hardware study.
//
// x and y are captured on one rising edge, the product leaves the output register on the
// next: r is valid two clock edges after the operands are applied, one new product per
// cycle. 8 + 8 input and 8 output flip-flops, plus one for the format select in the
// combined variant (24 / 25 flip-flops, the counts the paper reports). Reset is this
// design's choice (the paper does not mention one): asynchronous, active low, clearing all
// registers to zero.
module fp8_mul_reg
  import fp8_pkg::*;
#(
  parameter mul_variant_e VARIANT = MUL_COMBINED,
  parameter rmode_e       RM      = RM_RNE
) (
  input  logic       clk,
  input  logic       rst_n,
  input  fmt_e       fmt,  // combined variant only
  input  logic [7:0] x,
  input  logic [7:0] y,
  output logic [7:0] r
);

  logic [7:0] x_q, y_q, r_d;
  fmt_e       fmt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      y_q <= '0;
      r   <= '0;
    end else begin
      x_q <= x;
      y_q <= y;
      r   <= r_d;
    end
  end

  if (VARIANT == MUL_COMBINED) begin : g_fmt_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) fmt_q <= FMT_E5M2;
      else        fmt_q <= fmt;
    end
  end else begin : g_fmt_fixed
    assign fmt_q = (VARIANT == MUL_E4M3) ? FMT_E4M3 : FMT_E5M2;
  end

  fp8_mul #(.VARIANT(VARIANT), .RM(RM)) u_mul (.fmt(fmt_q), .x(x_q), .y(y_q), .r(r_d));

endmodule
