// tb_xr_npe_array: a 3x2 array fed with random IF and Wt words for tiles of
// random depth in every precision, with and without ReLU. After each tile the
// OF registers (read through of_col) must hold the rounded dot products of
// IF row i and Wt column j, lane by lane, computed in real arithmetic; of_valid
// must rise 5 cycles after the cycle that presents the last feed word.
module tb_xr_npe_array;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  localparam int R = 3, C = 2;
  logic clk = 0, rst = 1;
  prec_e prec = PREC_FP4;
  logic relu_sel = 0, feed_valid = 0, feed_clear = 0, feed_last = 0;
  logic [R-1:0][15:0] if_data = '0;
  logic [C-1:0][15:0] wt_data = '0;
  logic [0:0] of_col = '0;
  logic of_valid;
  logic [R-1:0][15:0] of_rd;
  int checks = 0, failures = 0;

  xr_npe_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned rnd_code(int p);
    int unsigned c;
    case (p)
      3: do c = $urandom & 16'hFFFF; while (is_nar(c, 16) || posit_scale(c, 16, 1) > 5 ||
                                             posit_scale(c, 16, 1) < -5);
      2: do c = $urandom & 8'hFF; while (is_nar(c, 8));
      1: do c = $urandom & 4'hF; while (is_nar(c, 4));
      default: c = $urandom & 4'hF;
    endcase
    return c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 24; t++) begin
      int p, k, wait_cyc;
      logic [15:0] iw [R][16];
      logic [15:0] ww [C][16];
      p = t % 4;
      k = 1 + $urandom % 10;
      @(negedge clk);
      prec = prec_e'(p);
      relu_sel = 1'(t / 4);
      for (int s = 0; s < k; s++) begin
        for (int i = 0; i < R; i++) begin
          iw[i][s] = '0;
          for (int l = 0; l < nlanes(p); l++) iw[i][s] |= 16'(rnd_code(p) << (lbits(p) * l));
          if_data[i] = iw[i][s];
        end
        for (int j = 0; j < C; j++) begin
          ww[j][s] = '0;
          for (int l = 0; l < nlanes(p); l++) ww[j][s] |= 16'(rnd_code(p) << (lbits(p) * l));
          wt_data[j] = ww[j][s];
        end
        feed_valid = 1; feed_clear = (s == 0); feed_last = (s == k - 1);
        @(negedge clk);
      end
      feed_valid = 0; feed_clear = 0; feed_last = 0;
      wait_cyc = 1;
      while (!of_valid && wait_cyc < 20) begin @(negedge clk); wait_cyc++; end
      checks++;
      if (wait_cyc != 5) begin failures++; $display("of_valid after %0d cycles", wait_cyc); end
      for (int j = 0; j < C; j++) begin
        of_col = 1'(j);
        #1;
        for (int i = 0; i < R; i++)
          for (int l = 0; l < nlanes(p); l++) begin
            real sum;
            int unsigned w, ec, g;
            w = lbits(p);
            sum = 0.0;
            for (int s = 0; s < k; s++)
              sum += lane_val(p, (iw[i][s] >> (w * l)) & ((1 << w) - 1)) *
                     lane_val(p, (ww[j][s] >> (w * l)) & ((1 << w) - 1));
            ec = lane_round(p, sum);
            if (relu_sel && sum < 0.0) ec = 0;
            g = (of_rd[i] >> (w * l)) & ((1 << w) - 1);
            checks++;
            if (g != ec) begin
              failures++;
              $display("tile %0d p%0d (%0d,%0d) lane %0d: %h expected %h", t, p, i, j, l, g, ec);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
