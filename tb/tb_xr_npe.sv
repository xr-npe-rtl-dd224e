// tb_xr_npe: self-checking testbench of the SIMD NPE.
//
// For each precision it issues random dot products of 1..12 terms (first
// term with clear), with bubbles and hold cycles, and compares every
// out_valid result, lane by lane, with the sum of the products computed in
// real arithmetic and rounded by xr_ref_pkg. It also checks the 3-cycle
// latency, ReLU on pe_out, NaR propagation and clearing, zero operands and
// saturation at maxpos/minpos. Posit(16,1) operands are drawn with scale in
// [-6, 6] so the real-valued reference sum stays exact.
module tb_xr_npe;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, accumulate = 1'b0, clear = 1'b0;
  prec_e prec = PREC_FP4;
  logic [15:0] a = '0, b = '0;
  logic out_valid;
  logic [15:0] mac_out, pe_out;
  int checks = 0, failures = 0;
  int cycle = 0;

  xr_npe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, pushed at issue, popped at out_valid
  typedef struct { int p; real sum[4]; bit nar[4]; int issue; } exp_t;
  exp_t q[$];
  real run_sum[4];
  bit  run_nar[4];

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      exp_t x;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected out_valid");
      end else begin
        x = q.pop_front();
        checks++;
        if (cycle - x.issue != 3) begin
          failures++;
          $display("latency %0d", cycle - x.issue);
        end
        for (int l = 0; l < nlanes(x.p); l++) begin
          int unsigned got, gpe, exp_c, exp_pe, w;
          w = lbits(x.p);
          got = (mac_out >> (w * l)) & ((1 << w) - 1);
          gpe = (pe_out >> (w * l)) & ((1 << w) - 1);
          exp_c = x.nar[l] ? (1 << (w - 1)) : lane_round(x.p, x.sum[l]);
          exp_pe = (!x.nar[l] && x.sum[l] < 0.0) ? 0 : exp_c;
          checks += 2;
          if (got != exp_c || gpe != exp_pe) begin
            failures++;
            $display("p%0d lane%0d sum=%g mac=%h exp=%h pe=%h exp=%h", x.p, l, x.sum[l],
                     got, exp_c, gpe, exp_pe);
          end
        end
      end
    end
  end

  function automatic int unsigned rnd_code(int p);
    int unsigned c;
    case (p)
      3: begin
        do c = $urandom & 16'hFFFF; while (is_nar(c, 16) || posit_scale(c, 16, 1) > 6 ||
                                           posit_scale(c, 16, 1) < -6);
        if ($urandom % 8 == 0) c = 0;
      end
      2: begin
        do c = $urandom & 8'hFF; while (is_nar(c, 8));
      end
      1: begin
        do c = $urandom & 4'hF; while (is_nar(c, 4));
      end
      default: c = $urandom & 4'hF;
    endcase
    return c;
  endfunction

  task automatic issue(int p, logic [15:0] wa, logic [15:0] wb, bit clr, bit acc);
    exp_t x;
    @(negedge clk);
    prec = prec_e'(p);
    a = wa;
    b = wb;
    clear = clr;
    accumulate = acc;
    in_valid = 1'b1;
    for (int l = 0; l < nlanes(p); l++) begin
      int w;
      int unsigned ca, cb;
      w = lbits(p);
      ca = (wa >> (w * l)) & ((1 << w) - 1);
      cb = (wb >> (w * l)) & ((1 << w) - 1);
      if (clr) begin run_sum[l] = 0.0; run_nar[l] = 0; end
      if (acc) begin
        run_sum[l] += lane_val(p, ca) * lane_val(p, cb);
        run_nar[l] |= lane_nar(p, ca) | lane_nar(p, cb);
      end
    end
    x.p = p;
    x.sum = run_sum;
    x.nar = run_nar;
    x.issue = cycle;
    q.push_back(x);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic issue_b2b(int p, int len);
    // back-to-back issue without bubbles
    for (int t = 0; t < len; t++) begin
      logic [15:0] wa, wb;
      exp_t x;
      wa = '0; wb = '0;
      for (int l = 0; l < nlanes(p); l++) begin
        wa |= 16'(rnd_code(p) << (lbits(p) * l));
        wb |= 16'(rnd_code(p) << (lbits(p) * l));
      end
      @(negedge clk);
      prec = prec_e'(p); a = wa; b = wb; clear = (t == 0); accumulate = 1'b1; in_valid = 1'b1;
      for (int l = 0; l < nlanes(p); l++) begin
        int w;
        w = lbits(p);
        if (t == 0) begin run_sum[l] = 0.0; run_nar[l] = 0; end
        run_sum[l] += lane_val(p, (wa >> (w * l)) & ((1 << w) - 1)) *
                      lane_val(p, (wb >> (w * l)) & ((1 << w) - 1));
      end
      x.p = p; x.sum = run_sum; x.nar = run_nar; x.issue = cycle;
      q.push_back(x);
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int p = 0; p < 4; p++) begin
      for (int s = 0; s < 25; s++) begin
        int len;
        len = 1 + $urandom % 12;
        for (int t = 0; t < len; t++) begin
          logic [15:0] wa, wb;
          wa = '0; wb = '0;
          for (int l = 0; l < nlanes(p); l++) begin
            wa |= 16'(rnd_code(p) << (lbits(p) * l));
            wb |= 16'(rnd_code(p) << (lbits(p) * l));
          end
          issue(p, wa, wb, t == 0, ($urandom % 10) != 0 || t == 0);
        end
      end
      issue_b2b(p, 10);
    end
    // NaR sticks until clear, then is removed
    issue(3, 16'h8000, 16'h4000, 1, 1);
    issue(3, 16'h4000, 16'h4000, 0, 1);
    issue(3, 16'h4000, 16'h4000, 1, 1);
    issue(2, 16'h8040, 16'h4040, 1, 1);
    issue(1, 16'h8421, 16'h4444, 1, 1);
    // saturation: maxpos*maxpos -> maxpos, minpos*minpos -> minpos
    issue(3, 16'h7FFF, 16'h7FFF, 1, 1);
    issue(3, 16'h0001, 16'h0001, 1, 1);
    issue(3, 16'hFFFF, 16'h0001, 1, 1);
    issue(2, 16'h7F01, 16'h7F01, 1, 1);
    issue(1, 16'h7171, 16'h7117, 1, 1);
    issue(0, 16'h7777, 16'h7F7F, 1, 1);
    // zero operands in every lane
    issue(0, 16'h0000, 16'h7531, 1, 1);
    issue(3, 16'h0000, 16'h4000, 1, 1);
    repeat (10) @(negedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("%0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
