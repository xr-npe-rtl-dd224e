// tb_xr_simd_addsub: random 128-bit operands, including all-ones lanes that
// make carries run across lane borders, in every precision. Each 32/64/128-bit
// lane of the sum must be the modular sum of its lanes alone.
module tb_xr_simd_addsub;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [127:0] a, b, sum;
  int checks = 0, failures = 0;

  xr_simd_addsub dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int pm, qw;
      logic [127:0] e;
      pm = i % 4;
      prec = prec_e'(pm);
      qw = (pm == 2) ? 64 : (pm == 3) ? 128 : 32;
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      if (i % 3 == 0) begin a = ~128'b0; b = 128'b1 << ($urandom % 128); end
      #1;
      e = '0;
      for (int l = 0; l < 128 / qw; l++) begin
        logic [127:0] m, la, lb;
        m = (qw == 128) ? ~128'b0 : ((128'b1 << qw) - 1);
        la = (a >> (qw * l)) & m;
        lb = (b >> (qw * l)) & m;
        e |= ((la + lb) & m) << (qw * l);
      end
      checks++;
      if (sum !== e) begin failures++; $display("prec %0d: %h expected %h", pm, sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
