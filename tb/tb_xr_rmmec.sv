// tb_xr_rmmec: random packed mantissas in all three lane shapes (4x 2-bit,
// 2x 6-bit, 1x 13-bit) with random lane enables. Each field of P must be the
// integer product of its lane's mantissas (zero for a disabled lane), other
// bits of P zero, and each p_2c field the negated product, sign-extended.
// Also all 16 2x2 cell products exhaustively in the 4-lane shape.
module tb_xr_rmmec;
  import xr_npe_pkg::*;
  prec_e prec;
  logic [12:0] mant_a, mant_b;
  logic [3:0] lane_en;
  logic [25:0] p;
  logic [31:0] p_2c;
  int checks = 0, failures = 0;

  xr_rmmec dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int pm);
    int n, mw, pw, fw;
    longint exp_p, ea, eb, pr;
    n  = (pm == 2) ? 2 : (pm == 3) ? 1 : 4;
    mw = (pm == 2) ? 6 : (pm == 3) ? 13 : 2;
    pw = 2 * mw;
    fw = 32 / n;
    #1;
    exp_p = 0;
    for (int l = 0; l < n; l++) begin
      ea = (mant_a >> (mw * l)) & ((1 << mw) - 1);
      eb = (mant_b >> (mw * l)) & ((1 << mw) - 1);
      pr = lane_en[l] ? ea * eb : 0;
      exp_p |= pr << (pw * l);
      checks++;
      if (((longint'(p_2c) >> (fw * l)) & ((64'd1 << fw) - 1)) != ((-pr) & ((64'd1 << fw) - 1))) begin
        failures++;
        $display("p_2c lane %0d prec %0d", l, pm);
      end
    end
    checks++;
    if (longint'(p) != exp_p) begin
      failures++;
      $display("prec %0d a=%h b=%h en=%b: P=%h expected %h", pm, mant_a, mant_b, lane_en, p, exp_p);
    end
  endtask

  initial begin
    prec = PREC_FP4;
    lane_en = 4'hF;
    for (int x = 0; x < 4; x++)
      for (int y = 0; y < 4; y++) begin
        mant_a = 13'(x * 8'h55);
        mant_b = 13'(y * 8'h55);
        check(0);
      end
    for (int i = 0; i < 3000; i++) begin
      int pm;
      pm = i % 4;
      prec = prec_e'(pm);
      mant_a = 13'($urandom);
      mant_b = 13'($urandom);
      if (pm < 2) begin mant_a[12:8] = '0; mant_b[12:8] = '0; end
      if (pm == 2) begin mant_a[12] = 1'b0; mant_b[12] = 1'b0; end
      lane_en = ($urandom % 3 == 0) ? 4'($urandom) : 4'hF;
      check(pm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
