// tb_xr_quire: random sequences of valid / accumulate / clear with random
// addends and NaR inputs, in every precision. A model keeps each lane's sum
// modulo its lane width and the sticky NaR flags; the quire must match it
// after every clock edge. Checks that clear alone empties, clear with
// accumulate restarts with the addend, and cycles without valid hold.
module tb_xr_quire;
  import xr_npe_pkg::*;
  logic clk = 0, rst = 1;
  prec_e prec = PREC_FP4;
  logic valid = 0, accumulate = 0, clear = 0;
  logic [127:0] addend = '0, q;
  logic [3:0] nar_in = '0, nar;
  int checks = 0, failures = 0;

  xr_quire dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] mq;
  logic [3:0]   mn;

  function automatic logic [127:0] lane_add(int pm, logic [127:0] x, logic [127:0] y);
    int qw;
    logic [127:0] r, m;
    qw = (pm == 2) ? 64 : (pm == 3) ? 128 : 32;
    m = (qw == 128) ? ~128'b0 : ((128'b1 << qw) - 1);
    r = '0;
    for (int l = 0; l < 128 / qw; l++) r |= ((((x >> (qw * l)) & m) + ((y >> (qw * l)) & m)) & m) << (qw * l);
    return r;
  endfunction

  initial begin
    mq = '0;
    mn = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int blk = 0; blk < 40; blk++) begin
      int pm;
      pm = blk % 4;
      for (int i = 0; i < 30; i++) begin
        @(negedge clk);
        prec = prec_e'(pm);
        valid = ($urandom % 5) != 0;
        accumulate = ($urandom % 4) != 0;
        clear = (i == 0) || ($urandom % 10 == 0);
        addend = {$urandom, $urandom, $urandom, $urandom};
        nar_in = ($urandom % 8 == 0) ? 4'($urandom) : 4'b0;
        if (valid) begin
          if (accumulate) begin
            mq = lane_add(pm, clear ? 128'b0 : mq, addend);
            mn = (clear ? 4'b0 : mn) | nar_in;
          end else if (clear) begin
            mq = '0;
            mn = '0;
          end
        end
        @(posedge clk);
        #1;
        checks++;
        if (q !== mq || nar !== mn) begin
          failures++;
          $display("prec %0d: q=%h nar=%b expected %h %b", pm, q, nar, mq, mn);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
