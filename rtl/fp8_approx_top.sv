// fp8_approx_top: registered approximate FP8 arithmetic unit with the paper's multipliers.
//
// Two datapaths share the operand pins:
//  * the general unit (fp8_approx_alu): any of the six operations, either format, any of
//    the seven rounding modes chosen per operation, on one 8-bit adder. Its operands and
//    controls are registered on one rising edge and its result (r, r_supported) on the
//    next, so a result appears two edges after its inputs; one operation per cycle.
//  * the combined E5M2/E4M3 multipliers of the hardware study, one fixed to RNe and one to
//    RZ (fp8_mul_reg), each with its own input and output registers and the same
//    two-edge latency. They use fmt, x and y only.
// Grouping these into one unit is this design's choice: the paper synthesises each
// multiplier on its own and gives the other operations as integer expressions.
// Reset is asynchronous, active low (not specified by the paper).
module fp8_approx_top
  import fp8_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  fmt_e       fmt,
  input  op_e        op,
  input  rmode_e     rm,
  input  logic [7:0] x,
  input  logic [7:0] y,
  output logic [7:0] r,            // general unit result
  output logic       r_supported,  // rm is exactly obtained for this op/format
  output logic [7:0] mul_rne,      // combined multiplier, RNe
  output logic [7:0] mul_rz        // combined multiplier, RZ
);

  fmt_e       fmt_q;
  op_e        op_q;
  rmode_e     rm_q;
  logic [7:0] x_q, y_q, r_d;
  logic       sup_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fmt_q       <= FMT_E5M2;
      op_q        <= OP_MUL;
      rm_q        <= RM_RNE;
      x_q         <= '0;
      y_q         <= '0;
      r           <= '0;
      r_supported <= 1'b0;
    end else begin
      fmt_q       <= fmt;
      op_q        <= op;
      rm_q        <= rm;
      x_q         <= x;
      y_q         <= y;
      r           <= r_d;
      r_supported <= sup_d;
    end
  end

  fp8_approx_alu u_alu (
    .fmt(fmt_q), .op(op_q), .rm(rm_q), .x(x_q), .y(y_q), .r(r_d), .supported(sup_d)
  );

  fp8_mul_reg #(.VARIANT(MUL_COMBINED), .RM(RM_RNE)) u_mul_rne (
    .clk, .rst_n, .fmt, .x, .y, .r(mul_rne)
  );

  fp8_mul_reg #(.VARIANT(MUL_COMBINED), .RM(RM_RZ)) u_mul_rz (
    .clk, .rst_n, .fmt, .x, .y, .r(mul_rz)
  );

endmodule
