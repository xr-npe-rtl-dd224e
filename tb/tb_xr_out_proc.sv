// tb_xr_out_proc: random normalised magnitudes (sign, scaling factor across
// and beyond each format's range, 32-bit mantissa, sticky) and zero / NaR
// lanes in every precision. The expected code is the real value
// norm * 2^(sf-31) (plus a small amount below the mantissa when sticky is
// set) rounded by the reference encoder of xr_ref_pkg; pe_out must be that
// code with negative lanes set to zero.
module tb_xr_out_proc;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  prec_e prec;
  logic [3:0] sign, zero, nar, sticky;
  logic [3:0][7:0] sf;
  logic [3:0][31:0] norm;
  logic [15:0] mac_out, pe_out;
  int checks = 0, failures = 0;
  int rng[4] = '{4, 5, 8, 31};

  xr_out_proc dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8000; i++) begin
      int pm;
      pm = i % 4;
      prec = prec_e'(pm);
      for (int l = 0; l < 4; l++) begin
        sign[l] = 1'($urandom);
        zero[l] = ($urandom % 16 == 0);
        nar[l]  = (pm != 0) && ($urandom % 16 == 0);
        sticky[l] = 1'($urandom);
        sf[l] = 8'(int'($urandom % (2 * rng[pm] + 1)) - rng[pm]);
        norm[l] = $urandom | 32'h8000_0000;
        if ($urandom % 4 == 0) norm[l][29:0] = '0;
        if ($urandom % 4 == 0) sticky[l] = 1'b0;
      end
      #1;
      for (int l = 0; l < nlanes(pm); l++) begin
        real v;
        int unsigned ec, ep, g, gp, w;
        w = lbits(pm);
        v = real'(norm[l]) * pow2(int'(signed'(sf[l])) - 31);
        if (sticky[l]) v += pow2(int'(signed'(sf[l])) - 40);
        if (sign[l]) v = -v;
        ec = nar[l] ? (1 << (w - 1)) : zero[l] ? 0 : lane_round(pm, v);
        ep = (!nar[l] && sign[l]) ? 0 : ec;
        g  = (mac_out >> (w * l)) & ((1 << w) - 1);
        gp = (pe_out >> (w * l)) & ((1 << w) - 1);
        checks++;
        if (g != ec || gp != ep) begin
          failures++;
          $display("prec %0d lane %0d v=%g: mac %h/%h pe %h/%h", pm, l, v, g, ec, gp, ep);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
