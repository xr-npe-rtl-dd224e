// xr_sign_scale: sign processing, scaling factor and shifted-product stage.
//
// Per lane, the product sign is the XOR of the operand signs (the 4-bit
// S_prod bus of the NPE diagram) and the product's scaling factor is
// SF_A + SF_B. The sum is turned into the left-shift amount that places the
// integer mantissa product in the fixed-point quire lane:
//   shift_amt = SF_A + SF_B + shift_bias(prec)
// where shift_bias = QF - 2*(mantissa width - 1) (see xr_npe_pkg). A negative
// amount is a right shift that drops only zero bits. Combinational.
module xr_sign_scale
  import xr_npe_pkg::*;
(
  input  prec_e            prec,
  input  logic [3:0]       sign_a,
  input  logic [3:0]       sign_b,
  input  logic [3:0][7:0]  sf_a,
  input  logic [3:0][7:0]  sf_b,
  output logic [3:0]       s_prod,
  output logic [3:0][7:0]  shift_amt
);
  always_comb begin
    s_prod = sign_a ^ sign_b;
    for (int l = 0; l < 4; l++)
      shift_amt[l] = 8'(signed'(sf_a[l]) + signed'(sf_b[l]) + 8'(shift_bias(prec)));
  end
endmodule
