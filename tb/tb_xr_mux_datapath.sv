// tb_xr_mux_datapath: random P, p_2c and product signs in every lane
// shape; each field of sprod must be the zero-extended P field for a positive
// lane and the p_2c field for a negative lane.
module tb_xr_mux_datapath;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [25:0] p;
  logic [31:0] p_2c, sprod;
  logic [3:0] s_prod;
  int checks = 0, failures = 0;

  xr_mux_datapath dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int pm, n, pw, fw;
      pm = i % 4;
      prec = prec_e'(pm);
      p = 26'($urandom);
      p_2c = $urandom;
      s_prod = 4'($urandom);
      n  = (pm == 2) ? 2 : (pm == 3) ? 1 : 4;
      pw = (pm == 2) ? 12 : (pm == 3) ? 26 : 4;
      fw = 32 / n;
      #1;
      for (int l = 0; l < n; l++) begin
        longint e, g;
        e = s_prod[l] ? ((longint'(p_2c) >> (fw * l)) & ((64'd1 << fw) - 1))
                      : ((longint'(p) >> (pw * l)) & ((64'd1 << pw) - 1));
        g = (longint'(sprod) >> (fw * l)) & ((64'd1 << fw) - 1);
        checks++;
        if (g != e) begin failures++; $display("prec %0d lane %0d: %h expected %h", pm, l, g, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
