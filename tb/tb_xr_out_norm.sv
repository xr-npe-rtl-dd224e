// tb_xr_out_norm: random lane magnitudes with random leading-one positions
// (and zero lanes) in every precision. A bit-by-bit scan in the testbench
// finds the top set bit pos; expected scaling factor pos - QF (QF = 2, 8,
// 12, 56), mantissa = the 32 bits from pos down (zero filled), sticky = OR of
// the rest.
module tb_xr_out_norm;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [127:0] mag;
  logic [3:0] zero, sticky;
  logic [3:0][7:0] sf;
  logic [3:0][31:0] norm;
  int checks = 0, failures = 0;
  int qf[4] = '{2, 8, 12, 56};

  xr_out_norm dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int pm, qw;
      pm = i % 4;
      prec = prec_e'(pm);
      qw = (pm == 2) ? 64 : (pm == 3) ? 128 : 32;
      mag = {$urandom, $urandom, $urandom, $urandom};
      for (int l = 0; l < 128 / qw; l++) begin
        int top;
        top = $urandom % (qw + 1);
        for (int b = top; b < qw; b++) mag[qw * l + b] = 1'b0;
      end
      #1;
      for (int l = 0; l < 128 / qw; l++) begin
        int pos;
        logic [31:0] en;
        logic es;
        pos = -1;
        for (int b = 0; b < qw; b++) if (mag[qw * l + b]) pos = b;
        en = '0;
        es = 1'b0;
        for (int b = 0; b < 32; b++) if (pos - b >= 0) en[31 - b] = mag[qw * l + pos - b];
        for (int b = 0; b <= pos - 32; b++) es |= mag[qw * l + b];
        checks++;
        if (pos < 0) begin
          if (!zero[l]) begin failures++; $display("zero missed"); end
        end else if (zero[l] || norm[l] != en || sticky[l] != es ||
                     int'(signed'(sf[l])) != pos - qf[pm]) begin
          failures++;
          $display("prec %0d lane %0d: pos %0d sf %0d norm %h/%h sticky %b/%b", pm, l, pos,
                   signed'(sf[l]), norm[l], en, sticky[l], es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
