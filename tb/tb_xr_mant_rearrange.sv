// tb_xr_mant_rearrange: random signed lane products and shift amounts in
// their legal ranges (FP4 0..4, Posit(4,1) -2..14, Posit(8,0) -10..14,
// Posit(16,1) -24..88; for negative shifts the product has as many low zero
// bits). Each quire lane, read as a signed number, must equal product *
// 2^shift, computed in real arithmetic.
module tb_xr_mant_rearrange;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  prec_e prec;
  logic [31:0] sprod;
  logic [3:0][7:0] shift_amt;
  logic [127:0] addend;
  int checks = 0, failures = 0;

  xr_mant_rearrange dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sreal(logic [127:0] v, int w);
    real r;
    logic neg;
    logic [127:0] m;
    m = (w == 128) ? ~128'b0 : ((128'b1 << w) - 1);
    v = v & m;
    neg = v[w-1];
    if (neg) v = (~v + 1'b1) & m;
    r = 0.0;
    for (int i = 0; i < w; i++) if (v[i]) r += pow2(i);
    return neg ? -r : r;
  endfunction

  initial begin
    int lo[4] = '{0, -2, -10, -24};
    int hi[4] = '{4, 14, 14, 88};
    int pwid[4] = '{4, 4, 12, 26};
    for (int i = 0; i < 3000; i++) begin
      int pm, n, fw, qw;
      real pv[4];
      int sh[4];
      pm = i % 4;
      prec = prec_e'(pm);
      n  = (pm == 2) ? 2 : (pm == 3) ? 1 : 4;
      fw = 32 / n;
      qw = 128 / n;
      sprod = '0;
      for (int l = 0; l < n; l++) begin
        longint mag;
        sh[l] = lo[pm] + int'($urandom % (hi[pm] - lo[pm] + 1));
        mag = longint'($urandom) & ((64'd1 << pwid[pm]) - 1);
        if (sh[l] < 0) mag = (mag >> (-sh[l])) << (-sh[l]);
        pv[l] = real'(mag);
        if ($urandom % 2) begin mag = -mag; pv[l] = -pv[l]; end
        sprod |= 32'((mag & ((64'd1 << fw) - 1)) << (fw * l));
        shift_amt[l] = 8'(sh[l]);
      end
      #1;
      for (int l = 0; l < n; l++) begin
        real g;
        g = sreal(addend >> (qw * l), qw);
        checks++;
        if (g != pv[l] * pow2(sh[l])) begin
          failures++;
          $display("prec %0d lane %0d: %g expected %g sprod=%h sh=%h add=%h", pm, l, g, pv[l] * pow2(sh[l]), sprod, shift_amt, addend);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
