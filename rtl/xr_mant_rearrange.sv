// xr_mant_rearrange: precision-adaptive mantissa rearrangement.
//
// Each signed lane product (8, 16 or 32-bit field of sprod) is sign-extended
// to its quire lane (32, 64 or 128 bits) and shifted by its shift amount:
// left for a positive amount, arithmetic right for a negative one (the bits
// shifted out are zero, since the quire LSB is the smallest product weight).
// The result is the 128-bit addend for the SIMD adder. Combinational.
module xr_mant_rearrange
  import xr_npe_pkg::*;
(
  input  prec_e            prec,
  input  logic [31:0]      sprod,
  input  logic [3:0][7:0]  shift_amt,
  output logic [127:0]     addend
);
  function automatic logic [127:0] align(logic signed [127:0] v, logic signed [7:0] amt);
    if (amt >= 0) return v <<< amt;
    else          return v >>> (-amt);
  endfunction

  always_comb begin
    addend = '0;
    case (prec)
      PREC_P8:
        for (int l = 0; l < 2; l++)
          addend[64*l +: 64] = 64'(align(128'(signed'(sprod[16*l +: 16])), signed'(shift_amt[l])));
      PREC_P16:
        addend = align(128'(signed'(sprod)), signed'(shift_amt[0]));
      default:
        for (int l = 0; l < 4; l++)
          addend[32*l +: 32] = 32'(align(128'(signed'(sprod[8*l +: 8])), signed'(shift_amt[l])));
    endcase
  end
endmodule
