// fp8_pkg: shared types and constants for the approximate FP8 integer-arithmetic units.
//
// Both 8-bit formats store sign | biased exponent | trailing significand:
//   E5M2: x[7] sign, x[6:2] exponent (bias 15), x[1:0] mantissa
//   E4M3: x[7] sign, x[6:3] exponent (bias 7),  x[2:0] mantissa
// Reading such a word as an integer gives Mitchell's logarithm of the value plus a
// fixed-point copy of the bias, B = bias << mantissa_bits (0x3c for E5M2, 0x38 for E4M3).
// Every operation here is therefore one integer addition of a pre-shifted operand, a
// second operand, a per-format constant and a one-bit carry-in.
//
// The constants follow the paper's summary tables, with one correction: the E5M2
// reciprocal uses 2B-1 = 0x77 (the paper prints 0x87, which contradicts its own
// "-X + 2B" and gives results 16 times too large).
package fp8_pkg;

  typedef enum logic {
    FMT_E5M2 = 1'b0,
    FMT_E4M3 = 1'b1
  } fmt_e;

  typedef enum logic [2:0] {
    OP_MUL   = 3'd0,  // x * y
    OP_SQ    = 3'd1,  // x^2
    OP_DIV   = 3'd2,  // x / y
    OP_REC   = 3'd3,  // 1 / x
    OP_SQRT  = 3'd4,  // sqrt(x)
    OP_RSQRT = 3'd5   // 1 / sqrt(x)
  } op_e;

  typedef enum logic [2:0] {
    RM_RNE   = 3'd0,  // nearest, ties to even
    RM_RNA   = 3'd1,  // nearest, ties away from zero
    RM_RNZ   = 3'd2,  // nearest, ties towards zero
    RM_RU    = 3'd3,  // towards +infinity
    RM_RD    = 3'd4,  // towards -infinity
    RM_RZ    = 3'd5,  // towards zero
    RM_FAITH = 3'd6   // faithful: RD(x) or RU(x)
  } rmode_e;

  // Multiplier variants of the hardware study: one format each, or both behind a select.
  typedef enum logic [1:0] {
    MUL_E5M2     = 2'd0,
    MUL_E4M3     = 2'd1,
    MUL_COMBINED = 2'd2
  } mul_variant_e;

  // Fixed-point bias B = bias << mantissa_bits.
  localparam logic [7:0] B_E5M2 = 8'h3c;
  localparam logic [7:0] B_E4M3 = 8'h38;

  // Additive constant of each operation (the carry-in comes on top).
  function automatic logic [7:0] op_const(fmt_e fmt, op_e op);
    if (fmt == FMT_E5M2) begin
      unique case (op)
        OP_MUL, OP_SQ: return 8'hc4;  // -B
        OP_DIV:        return 8'h3b;  //  B - 1
        OP_REC:        return 8'h77;  // 2B - 1
        OP_SQRT:       return 8'h1e;  //  B/2
        OP_RSQRT:      return 8'h5a;  // 3B/2
        default:       return 8'h00;
      endcase
    end else begin
      unique case (op)
        OP_MUL, OP_SQ: return 8'hc8;  // -B
        OP_DIV:        return 8'h37;  //  B - 1
        OP_REC:        return 8'h6f;  // 2B - 1
        OP_SQRT:       return 8'h1b;  //  B/2 - 1
        OP_RSQRT:      return 8'h53;  // 3B/2 - 1
        default:       return 8'h00;
      endcase
    end
  endfunction

endpackage
