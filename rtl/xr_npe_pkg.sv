// xr_npe_pkg: types and constants shared by the SIMD neural processing engine
// (NPE) and the matrix co-processor built from it.
//
// The precision code is the one printed next to the "prec" input of the NPE
// block diagram: 2'b00 FP4 (E2M1), 2'b01 Posit(4,1), 2'b10 Posit(8,0),
// 2'b11 Posit(16,1). One 16-bit operand word carries 4, 4, 2 or 1 lanes.
//
// Everything else here is this design's own choice: the 128-bit quire split
// into 4x32, 2x64 or 1x128 bit lanes, the position of the quire binary point
// per format (QF = number of fraction bits, chosen so that every product of two
// representable values is exact in the quire), and the constant that turns the
// sum of two scaling factors into a quire shift amount.
package xr_npe_pkg;

  typedef enum logic [1:0] {
    PREC_FP4  = 2'b00,  // 4 lanes, FP4 E2M1
    PREC_P4   = 2'b01,  // 4 lanes, Posit(4,1)
    PREC_P8   = 2'b10,  // 2 lanes, Posit(8,0)
    PREC_P16  = 2'b11   // 1 lane,  Posit(16,1)
  } prec_e;

  // Number of active lanes for a precision.
  function automatic int unsigned lanes_of(prec_e p);
    case (p)
      PREC_P8:  return 2;
      PREC_P16: return 1;
      default:  return 4;
    endcase
  endfunction

  // Width of one lane of the quire.
  function automatic int unsigned qlane_w(prec_e p);
    case (p)
      PREC_P8:  return 64;
      PREC_P16: return 128;
      default:  return 32;
    endcase
  endfunction

  // Quire fraction bits: LSB weight is 2^-QF. It equals the smallest exponent
  // of a product of two values of the format.
  function automatic int qfrac(prec_e p);
    case (p)
      PREC_FP4: return 2;
      PREC_P4:  return 8;
      PREC_P8:  return 12;
      default:  return 56;
    endcase
  endfunction

  // Shift amount = SF_A + SF_B + shift_bias: QF minus the product's fraction
  // bits (2*(mantissa width - 1)).
  function automatic int shift_bias(prec_e p);
    case (p)
      PREC_FP4: return 0;   // 2  - 2
      PREC_P4:  return 6;   // 8  - 2
      PREC_P8:  return 2;   // 12 - 10
      default:  return 32;  // 56 - 24
    endcase
  endfunction

  // Count of leading zeros of a 128-bit vector (128 when it is zero).
  function automatic logic [7:0] lzc128(logic [127:0] v);
    logic [7:0] n;
    logic       found;
    n = 8'd128;
    found = 1'b0;
    for (int i = 127; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 8'(127 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

endpackage
