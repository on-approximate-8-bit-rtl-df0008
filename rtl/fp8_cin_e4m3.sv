// fp8_cin_e4m3: conditional carry-in for the approximate E4M3 operations.
//
// Same role as fp8_cin_e5m2 for the three-bit-mantissa format: from the mantissa bits
// x[2:0], y[2:0] (and the exponent LSB x[3] for the root operations) it forms the carry-in
// that makes  A + B' + K + cin  the requested rounding of the exact result, and flags the
// (operation, mode) pairs for which no carry-in suffices (RU for all operations; RD and
// RZ for mul, div and reciprocal except where listed below).
//
// The sum-of-products terms are those of the paper's E4M3 summary table. Three of them
// were corrected after an exhaustive comparison with exact rounding:
//   * square root, RNe/RNa/RNz: the equation reads ~x3 + x0 + x1 + x2, but the text says
//     the approximation falls short "when the least significant bit of the exponent is 1";
//     following the text, x3 is used uninverted.
//   * square root, RD/RZ: the same x3 polarity is swapped, giving
//     ~x3 x0 + x3 (x0 ~x1 + x0 ~x2 + ~x1 ~x2).
//   * square root, faithful: the table gives 0, which is more than one ulp off for odd
//     mantissas and for a zero mantissa with an odd exponent; the correctly rounded (RN)
//     carry-in is used, which is faithful as well.
// The reciprocal square root expects the operand shifted as (-X) >>> 1 (see fp8_approx_alu);
// with that reading every listed term is exact.
// Purely combinational, no timing.
module fp8_cin_e4m3
  import fp8_pkg::*;
(
  input  logic [7:0] x,          // first operand (E4M3 encoding)
  input  logic [7:0] y,          // second operand (used by mul and div only)
  input  op_e        op,
  input  rmode_e     rm,
  output logic       cin,        // carry-in to the integer adder
  output logic       supported   // 0 when the mode cannot be reached with a carry-in
);

  logic x0, x1, x2, x3, y0, y1, y2;
  assign x0 = x[0];
  assign x1 = x[1];
  assign x2 = x[2];
  assign x3 = x[3];
  assign y0 = y[0];
  assign y1 = y[1];
  assign y2 = y[2];

  logic mul_rne, mul_rna, mul_rnz, mul_rz, mul_f;
  assign mul_rne = (x0 & y2 & ~x2 & ~y0) | (x0 & y2 & ~x2 & ~y1) | (x1 & y2 & ~x2 & ~y0)
                 | (x1 & y2 & ~x2 & ~y1) | (x2 & y0 & ~x0 & ~y2) | (x2 & y0 & ~x1 & ~y2)
                 | (x2 & y1 & ~x0 & ~y2) | (x2 & y1 & ~x1 & ~y2) | (x2 & y2 & ~x1 & ~y1)
                 | (x0 & x1 & y1 & ~x2 & ~y2) | (x1 & y0 & y1 & ~x2 & ~y2);
  assign mul_rna = (x0 & y2 & ~x1 & ~y1) | (x0 & y2 & ~x2 & ~y0) | (x1 & y1 & ~x0 & ~y2)
                 | (x1 & y1 & ~x2 & ~y0) | (x1 & y1 & ~x2 & ~y2) | (x1 & y2 & ~x2 & ~y1)
                 | (x2 & y0 & ~x0 & ~y2) | (x2 & y0 & ~x1 & ~y1) | (x2 & y1 & ~x1 & ~y2)
                 | (x2 & y2 & ~x0 & ~x1 & ~y0) | (x2 & y2 & ~x0 & ~y0 & ~y1);
  assign mul_rnz = (x1 & y2 & ~x2 & ~y0) | (x1 & y2 & ~x2 & ~y1) | (x2 & y1 & ~x0 & ~y2)
                 | (x2 & y1 & ~x1 & ~y2) | (x2 & y2 & ~x1 & ~y1) | (x0 & x1 & y1 & ~x2 & ~y2)
                 | (x0 & x2 & y0 & ~x1 & ~y2) | (x0 & y0 & y2 & ~x2 & ~y1)
                 | (x0 & y1 & y2 & ~x2 & ~y0) | (x1 & x2 & y0 & ~x0 & ~y2)
                 | (x1 & y0 & y1 & ~x2 & ~y2);
  assign mul_rz  = (x1 & y2 & ~x0 & ~x2 & ~y1) | (x1 & y2 & ~x2 & ~y0 & ~y1)
                 | (x2 & y1 & ~x0 & ~x1 & ~y2) | (x2 & y1 & ~x1 & ~y0 & ~y2)
                 | (x0 & x1 & y0 & y1 & ~x2 & ~y2) | (x2 & y2 & ~x0 & ~x1 & ~y0 & ~y1);
  assign mul_f   = (x2 | x1 | x0) & (y2 | y1 | y0);

  logic sq_rne, sq_rna, sq_rz, sq_f;
  assign sq_rne = (x2 & ~x1) | (x0 & x1 & ~x2);
  assign sq_rna = (x1 & ~x2) | (x2 & ~x1);
  assign sq_rz  = (x0 & x1 & ~x2) | (x2 & ~x0 & ~x1);
  assign sq_f   = (x2 & ~x1 & ~x0) | (~x2 & x1 & x0);

  logic div_rn, div_f;
  assign div_rn = (x0 & x1 & ~x2) | (x1 & ~x2 & ~y2) | (x2 & y1 & y2) | (x2 & ~x0 & ~x1)
                | (x2 & ~x1 & ~y1) | (y0 & y1 & y2) | (~y0 & ~y1 & ~y2)
                | (x0 & ~x1 & ~y1 & ~y2) | (x2 & y0 & y2 & ~x0);
  assign div_f  = (~y2 & ~y1 & ~y0) | (x[2:0] == y[2:0]);

  logic rec_rn, rec_f;
  assign rec_rn = (x0 & x1 & x2) | (~x0 & ~x1 & ~x2);
  assign rec_f  = ~x2 & ~x1 & ~x0;

  logic sqrt_rn, sqrt_rz;
  assign sqrt_rn = x3 | x0 | x1 | x2;
  assign sqrt_rz = (~x3 & x0) | (x3 & ((x0 & ~x1) | (x0 & ~x2) | (~x1 & ~x2)));

  logic rsqrt_rn, rsqrt_rz;
  assign rsqrt_rn = (x3 & ~x1 & ~x2) | (~x3 & x1 & x2) | x0;
  assign rsqrt_rz = (x3 & ~x1 & ~x2) | (~x3 & x0 & x1 & x2);

  always_comb begin
    cin       = 1'b0;
    supported = 1'b1;
    unique case (op)
      OP_MUL: begin
        unique case (rm)
          RM_RNE:   cin = mul_rne;
          RM_RNA:   cin = mul_rna;
          RM_RNZ:   cin = mul_rnz;
          RM_RZ:    cin = mul_rz;
          RM_FAITH: cin = mul_f;
          default:  supported = 1'b0;  // RU, RD
        endcase
      end
      OP_SQ: begin
        unique case (rm)
          RM_RNE, RM_RNZ: cin = sq_rne;
          RM_RNA:         cin = sq_rna;
          RM_RD, RM_RZ:   cin = sq_rz;
          RM_FAITH:       cin = sq_f;
          default:        supported = 1'b0;  // RU
        endcase
      end
      OP_DIV: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ: cin = div_rn;
          RM_FAITH:               cin = div_f;
          default:                supported = 1'b0;  // RU, RD, RZ
        endcase
      end
      OP_REC: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ: cin = rec_rn;
          RM_FAITH:               cin = rec_f;
          default:                supported = 1'b0;  // RU, RD, RZ
        endcase
      end
      OP_SQRT: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ, RM_FAITH: cin = sqrt_rn;
          RM_RD, RM_RZ:                     cin = sqrt_rz;
          default:                          supported = 1'b0;  // RU
        endcase
      end
      OP_RSQRT: begin
        unique case (rm)
          RM_RNE, RM_RNA, RM_RNZ: cin = rsqrt_rn;
          RM_RD, RM_RZ:           cin = rsqrt_rz;
          RM_FAITH:               cin = 1'b1;
          default:                supported = 1'b0;  // RU
        endcase
      end
      default: supported = 1'b0;
    endcase
  end

endmodule
