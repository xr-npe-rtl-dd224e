// tb_xr_quire_out_sel: random partial sums (and lane values near zero and at
// the negative limit) in every precision; each lane's sign must be its top
// bit and its magnitude the absolute value, computed independently with
// per-lane arithmetic.
module tb_xr_quire_out_sel;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [127:0] ps, mag;
  logic [3:0] sign;
  int checks = 0, failures = 0;

  xr_quire_out_sel dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int pm, qw;
      logic [127:0] m, em;
      logic [3:0] es;
      pm = i % 4;
      prec = prec_e'(pm);
      qw = (pm == 2) ? 64 : (pm == 3) ? 128 : 32;
      ps = {$urandom, $urandom, $urandom, $urandom};
      if (i % 7 == 0) ps = ~128'b0;
      m = (qw == 128) ? ~128'b0 : ((128'b1 << qw) - 1);
      em = '0;
      es = '0;
      for (int l = 0; l < 128 / qw; l++) begin
        logic [127:0] v;
        v = (ps >> (qw * l)) & m;
        es[l] = v[qw-1];
        if (es[l]) v = (m - v + 1) & m;
        em |= v << (qw * l);
      end
      #1;
      checks++;
      if (mag !== em || sign !== es) begin
        failures++;
        $display("prec %0d: %h %b expected %h %b", pm, mag, sign, em, es);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
