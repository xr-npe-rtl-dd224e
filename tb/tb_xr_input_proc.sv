// tb_xr_input_proc: checks the lane decoding of both operands in all four
// precisions. For random words, every lane's sign, zero and NaR flags and
// the value mant * 2^(sf - fraction bits) must match the reference decoding
// of xr_ref_pkg (real arithmetic). Exhaustive for the 4-bit and 8-bit
// formats, random for Posit(16,1).
module tb_xr_input_proc;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  logic [15:0] a, b;
  prec_e prec;
  logic [3:0] sign_a, sign_b, zero_a, zero_b, nar_a, nar_b;
  logic [3:0][7:0] sf_a, sf_b;
  logic [12:0] mant_a, mant_b;
  int checks = 0, failures = 0;

  xr_input_proc dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lane(int p, int l, int unsigned code, logic s, logic z, logic n,
                            logic [7:0] sf, logic [12:0] mant);
    real v, got;
    int fb, mw, m;
    mw = (p == 2) ? 6 : (p == 3) ? 13 : 2;
    fb = mw - 1;
    m = (mant >> ((p == 2) ? 6 * l : (p == 3) ? 0 : 2 * l)) & ((1 << mw) - 1);
    v = lane_val(p, code);
    got = real'(m) * pow2(int'(signed'(sf)) - fb);
    if (s) got = -got;
    checks++;
    if (lane_nar(p, code)) begin
      if (!n) begin failures++; $display("p%0d %h: NaR missed", p, code); end
    end else if (n || (z != (v == 0.0)) || (v != 0.0 && got != v)) begin
      failures++;
      $display("p%0d lane%0d code %h: s=%b z=%b n=%b sf=%0d m=%h -> %g, expected %g", p, l,
               code, s, z, n, signed'(sf), m, got, v);
    end
  endtask

  task automatic run(int p, logic [15:0] wa, logic [15:0] wb);
    prec = prec_e'(p);
    a = wa;
    b = wb;
    #1;
    for (int l = 0; l < nlanes(p); l++) begin
      int w;
      w = lbits(p);
      check_lane(p, l, (wa >> (w * l)) & ((1 << w) - 1), sign_a[l], zero_a[l], nar_a[l],
                 sf_a[l], mant_a);
      check_lane(p, l, (wb >> (w * l)) & ((1 << w) - 1), sign_b[l], zero_b[l], nar_b[l],
                 sf_b[l], mant_b);
    end
  endtask

  initial begin
    for (int p = 0; p < 2; p++)
      for (int c = 0; c < 16; c++) run(p, 16'(c * 16'h1111), 16'(((c + 5) % 16) * 16'h1111));
    for (int c = 0; c < 256; c++) run(2, 16'(c | (((c * 7) & 255) << 8)), 16'(c << 8 | 8'h80));
    for (int i = 0; i < 3000; i++) run(3, 16'($urandom), 16'($urandom));
    run(3, 16'h8000, 16'h0000);
    run(3, 16'h7FFF, 16'h0001);
    run(3, 16'h8001, 16'hFFFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
