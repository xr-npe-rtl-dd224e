// tb_xr_sign_scale: random operand signs and scaling factors in every
// precision; S_prod must be the lane-wise XOR and the shift amount the sum of
// the two scaling factors plus the quire offset of the format
// (FP4 0, Posit(4,1) 6, Posit(8,0) 2, Posit(16,1) 32).
module tb_xr_sign_scale;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [3:0] sign_a, sign_b, s_prod;
  logic [3:0][7:0] sf_a, sf_b, shift_amt;
  int checks = 0, failures = 0;
  int bias[4] = '{0, 6, 2, 32};

  xr_sign_scale dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int p;
      p = i % 4;
      prec = prec_e'(p);
      sign_a = 4'($urandom);
      sign_b = 4'($urandom);
      for (int l = 0; l < 4; l++) begin
        sf_a[l] = 8'(int'($urandom % 57) - 28);
        sf_b[l] = 8'(int'($urandom % 57) - 28);
      end
      #1;
      checks++;
      if (s_prod != (sign_a ^ sign_b)) begin failures++; $display("sign"); end
      for (int l = 0; l < 4; l++) begin
        int e;
        e = int'(signed'(sf_a[l])) + int'(signed'(sf_b[l])) + bias[p];
        checks++;
        if (int'(signed'(shift_amt[l])) != e) begin
          failures++;
          $display("p%0d lane %0d: %0d expected %0d", p, l, signed'(shift_amt[l]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
