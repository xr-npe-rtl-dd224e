// xr_out_norm: LOD count, resultant scaling factor and output mantissa
// processing.
//
// For each lane magnitude (32, 64 or 128 bits) a leading-one detector finds
// the position pos of the top set bit. The resultant scaling factor is
// pos - QF (QF = quire fraction bits of the format), and the mantissa is
// shifted left by the LOD count so that its leading one sits at bit 31 of a
// 32-bit field; all bits below those 32 are ORed into a sticky bit for
// rounding. A lane whose magnitude is zero raises zero. Combinational.
module xr_out_norm
  import xr_npe_pkg::*;
(
  input  prec_e             prec,
  input  logic [127:0]      mag,
  output logic [3:0]        zero,
  output logic [3:0][7:0]   sf,
  output logic [3:0][31:0]  norm,
  output logic [3:0]        sticky
);
  always_comb begin
    int unsigned w, n;
    zero   = 4'hF;
    sf     = '0;
    norm   = '0;
    sticky = '0;
    w = qlane_w(prec);
    n = lanes_of(prec);
    for (int l = 0; l < 4; l++) begin
      logic [127:0] t;
      logic [7:0]   lz;
      t  = '0;
      lz = '0;
      if (l < int'(n)) begin
        // lane value left-aligned in 128 bits
        t  = (mag >> (w * l)) << (128 - w);
        lz = lzc128(t);
        t  = t << lz;
        zero[l]   = (lz == 8'd128);
        sf[l]     = 8'(int'(w) - 1 - int'(lz) - qfrac(prec));
        norm[l]   = t[127:96];
        sticky[l] = |t[95:0];
      end
    end
  end
endmodule
