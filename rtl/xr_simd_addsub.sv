// xr_simd_addsub: SIMD adder of the quire accumulation loop.
//
// Adds two 128-bit vectors as four 32-bit slices. The carry out of a slice
// goes into the next slice only where the precision joins them: never in the
// 4-lane modes, between slices 0-1 and 2-3 for Posit(8,0), and between all
// slices for Posit(16,1). Subtraction arrives as an addend already in two's
// complement (the MUX-ed datapath selects it), so one adder serves add and
// subtract. Combinational.
module xr_simd_addsub
  import xr_npe_pkg::*;
(
  input  prec_e         prec,
  input  logic [127:0]  a,
  input  logic [127:0]  b,
  output logic [127:0]  sum
);
  always_comb begin
    logic carry, cin;
    carry = 1'b0;
    for (int s = 0; s < 4; s++) begin
      logic [32:0] t;
      case (prec)
        PREC_P8:  cin = (s == 1 || s == 3) ? carry : 1'b0;
        PREC_P16: cin = carry;
        default:  cin = 1'b0;
      endcase
      t = {1'b0, a[32*s +: 32]} + {1'b0, b[32*s +: 32]} + 33'(cin);
      sum[32*s +: 32] = t[31:0];
      carry = t[32];
    end
  end
endmodule
