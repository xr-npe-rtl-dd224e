// xr_quire_out_sel: Sign_resultant and SIMD quire output selection.
//
// For each quire lane (32, 64 or 128 bits by precision) the resultant sign is
// the lane's top bit; a multiplexer picks the partial sum PS itself or its
// lane-wise two's complement so that the raw output is the magnitude of the
// sum. Unused lanes give sign 0 and magnitude 0. Combinational.
module xr_quire_out_sel
  import xr_npe_pkg::*;
(
  input  prec_e         prec,
  input  logic [127:0]  ps,
  output logic [3:0]    sign,
  output logic [127:0]  mag
);
  always_comb begin
    sign = '0;
    mag  = '0;
    case (prec)
      PREC_P8:
        for (int l = 0; l < 2; l++) begin
          sign[l] = ps[64*l + 63];
          mag[64*l +: 64] = sign[l] ? -ps[64*l +: 64] : ps[64*l +: 64];
        end
      PREC_P16: begin
        sign[0] = ps[127];
        mag = sign[0] ? -ps : ps;
      end
      default:
        for (int l = 0; l < 4; l++) begin
          sign[l] = ps[32*l + 31];
          mag[32*l +: 32] = sign[l] ? -ps[32*l +: 32] : ps[32*l +: 32];
        end
    endcase
  end
endmodule
