// fp8_approx_alu: approximate FP8 arithmetic on a single 8-bit integer adder.
//
// An FP8 word read as an integer is, up to the constant B = bias << mantissa_bits, a
// fixed-point base-2 logarithm of the value (Mitchell's approximation). Products,
// quotients, powers and roots therefore become additions of the raw words:
//
//   op       first term A        second term   constant K (E5M2 / E4M3)
//   x*y      X                   Y             0xc4 / 0xc8   (-B)
//   x^2      X << 1              0             0xc4 / 0xc8   (-B)
//   x/y      X                   -Y            0x3b / 0x37   (B-1)
//   1/x      -X                  0             0x77 / 0x6f   (2B-1)
//   sqrt x   X >> 1  (logical)   0             0x1e / 0x1b   (B/2, B/2-1)
//   1/sqrtx  (-X) >>> 1          0             0x5a / 0x53   (3B/2, 3B/2-1)
//
//   r = A + second + K + cin   (mod 256)
//
// The carry-in comes from fp8_cin_e5m2 / fp8_cin_e4m3 and selects the rounding mode.
// The sign bit needs no separate path: it falls out of the same addition as long as the
// result is a normal number. Both formats share the adder; only K and cin depend on the
// format select, as in the paper's combined multiplier. Inputs are assumed to be normal
// numbers (no zero, subnormal, infinity or NaN handling), and x > 0 for the two roots;
// results that leave the normal range wrap, as the paper's expressions do.
//
// The reciprocal square root uses an arithmetic shift of the negated word; the paper
// writes "-X >> 1", and this reading is the one for which its carry-in terms are exact.
// The E5M2 reciprocal constant is 0x77 (= 2B-1); see fp8_pkg.
// Purely combinational.
module fp8_approx_alu
  import fp8_pkg::*;
(
  input  fmt_e       fmt,
  input  op_e        op,
  input  rmode_e     rm,
  input  logic [7:0] x,
  input  logic [7:0] y,
  output logic [7:0] r,
  output logic       supported  // the chosen rounding mode is obtained exactly
);

  logic cin_e5, cin_e4, sup_e5, sup_e4;

  fp8_cin_e5m2 u_cin_e5m2 (.x, .y, .op, .rm, .cin(cin_e5), .supported(sup_e5));
  fp8_cin_e4m3 u_cin_e4m3 (.x, .y, .op, .rm, .cin(cin_e4), .supported(sup_e4));

  logic [7:0] neg_x, a, b;
  assign neg_x = 8'(-x);

  always_comb begin
    a = x;
    b = '0;
    unique case (op)
      OP_MUL:   b = y;
      OP_SQ:    a = {x[6:0], 1'b0};
      OP_DIV:   b = 8'(-y);
      OP_REC:   a = neg_x;
      OP_SQRT:  a = {1'b0, x[7:1]};
      OP_RSQRT: a = {neg_x[7], neg_x[7:1]};
      default:  ;
    endcase
  end

  logic cin;
  assign cin       = (fmt == FMT_E5M2) ? cin_e5 : cin_e4;
  assign supported = (fmt == FMT_E5M2) ? sup_e5 : sup_e4;
  assign r         = a + b + op_const(fmt, op) + {7'd0, cin};

endmodule
