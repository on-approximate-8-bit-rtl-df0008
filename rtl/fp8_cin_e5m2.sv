// fp8_cin_e5m2: conditional carry-in for the approximate E5M2 operations.
//
// The approximate result of every operation is  A + B' + K + cin  (see fp8_approx_alu).
// This block returns the one-bit cin that turns that approximation into the requested
// rounding of the exact result, as a sum of products of the two mantissa bits of each
// operand (x[1:0], y[1:0]) and, for the directed modes, the sign of the result.
// It also reports whether the requested (operation, mode) pair is obtainable at all
// with a carry-in; when it is not (square root and reciprocal square root under RD or
// RZ), cin is 0 and `supported` is low.
//
// The expressions are those of the paper's E5M2 summary table, with three corrections
// found by checking every operand pair against exact rounding:
//   * reciprocal RU/RD: the paper writes RU = x7 + ~x0~x1 and RD = ~x7 + ~x0~x1; the
//     signs are swapped relative to the division terms (RU = ~Sr + ..., RD = Sr + ...)
//     from which the reciprocal is derived. The division polarity is used here.
//   * division, faithful: the table gives cin = 0, but with the lowered constant 0x3b this
//     is up to one ulp too small. cin = 1 restores the original X - Y + 0x3c, whose error
//     the paper states lies in [0, 1 ulp], i.e. faithful.
//   * the reciprocal constant itself is corrected in fp8_pkg (0x77, not 0x87).
// Purely combinational, no timing.
module fp8_cin_e5m2
  import fp8_pkg::*;
(
  input  logic [7:0] x,          // first operand (E5M2 encoding)
  input  logic [7:0] y,          // second operand (used by mul and div only)
  input  op_e        op,
  input  rmode_e     rm,
  output logic       cin,        // carry-in to the integer adder
  output logic       supported   // 0 when the mode cannot be reached with a carry-in
);

  logic x0, x1, y0, y1, x7, sr;
  assign x0 = x[0];
  assign x1 = x[1];
  assign y0 = y[0];
  assign y1 = y[1];
  assign x7 = x[7];
  assign sr = x[7] ^ y[7];  // sign of a product or quotient

  // Terms shared by several modes.
  logic mul_rne, mul_tie_half, mul_nz, div_rn, div_rz, rec_rn, rec_m0;
  assign mul_rne      = (x0 & y1 & ~x1 & ~y0) | (x1 & y0 & ~x0 & ~y1);
  assign mul_tie_half = x1 & y1 & ~x0 & ~y0;                 // m_x = m_y = 0.5
  assign mul_nz       = (x0 | x1) & (y0 | y1);               // both mantissas non-zero
  assign div_rn       = x0 | x1 | (y0 & y1) | (~y0 & ~y1);
  assign div_rz       = (~y0 & ~y1) | (x0 & ~x1 & ~y1) | (x1 & ~x0 & ~y0) | (x0 & x1 & y0 & y1);
  assign rec_rn       = (x0 & x1) | (~x0 & ~x1);
  assign rec_m0       = ~x0 & ~x1;

  always_comb begin
    cin       = 1'b0;
    supported = 1'b1;
    unique case (op)
      OP_MUL: begin
        unique case (rm)
          RM_RNE:  cin = mul_rne;
          RM_RNA:  cin = mul_rne | mul_tie_half;
          RM_RU:   cin = ~sr & mul_nz;
          RM_RD:   cin = sr & mul_nz;
          default: cin = 1'b0;  // RNz, RZ, faithful
        endcase
      end
      OP_SQ: begin
        unique case (rm)
          RM_RNA:  cin = x1 & ~x0;
          RM_RU:   cin = x0 | x1;
          default: cin = 1'b0;  // RNe, RNz, RD, RZ, faithful
        endcase
      end
      OP_DIV: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ: cin = div_rn;
          RM_RU:    cin = ~sr | div_rz;
          RM_RD:    cin = sr | div_rz;
          RM_RZ:    cin = div_rz;
          default:  cin = 1'b1;  // faithful
        endcase
      end
      OP_REC: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ: cin = rec_rn;
          RM_RU:    cin = ~x7 | rec_m0;
          RM_RD:    cin = x7 | rec_m0;
          RM_RZ:    cin = rec_m0;
          default:  cin = 1'b1;  // faithful
        endcase
      end
      OP_SQRT, OP_RSQRT: begin
        unique case (rm)
          RM_RU:        cin = x0;
          RM_RD, RM_RZ: supported = 1'b0;
          default:      cin = 1'b0;  // RNe, RNa, RNz, faithful
        endcase
      end
      default: supported = 1'b0;
    endcase
  end

endmodule
