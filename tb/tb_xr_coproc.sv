// tb_xr_coproc: end-to-end test of the co-processor at its default size
// (8x8 NPEs, 256-word banks).
//
// A behavioural AXI4-Lite master plays the host: it fills the IF and Wt banks
// with random operand words, configures a tile (precision, K, base
// addresses, ReLU select), starts it, polls STATUS until done and reads all
// 64 OF words back. Every lane of every result is compared with the dot
// product computed in real arithmetic and rounded by xr_ref_pkg. Tiles run
// in all four precisions with and without ReLU and with varying bases and K.
// It also checks the CYCLES register against K + 7 + COLS and the SLVERR
// answer to a bank access while busy, and counts each mechanism: every
// precision mode and a mode switch, ReLU clamping, zero-operand gating, NaR,
// saturation, the busy error.
module tb_xr_coproc;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready;
  logic        rvalid, rready, busy, done;
  logic [15:0] awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;

  xr_coproc dut (.clk, .rst, .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
                 .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_bvalid(bvalid),
                 .s_bready(bready), .s_bresp(bresp), .s_arvalid(arvalid), .s_arready(arready),
                 .s_araddr(araddr), .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata),
                 .s_rresp(rresp), .busy, .done);
  xr_axi_master host (.clk, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid,
                      .bready, .bresp, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
                      .rresp);

  int checks = 0, failures = 0;
  int n_mode[4], n_switch = 0, n_relu = 0, n_zero = 0, n_nar = 0, n_sat = 0, n_busyerr = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] ifw [ROWS][256];
  logic [15:0] wtw [COLS][256];

  function automatic int unsigned rnd_code(int p);
    int unsigned c;
    case (p)
      3: do c = $urandom & 16'hFFFF; while (is_nar(c, 16) ||
              posit_scale(c, 16, 1) > 5 || posit_scale(c, 16, 1) < -5);
      2: do c = $urandom & 8'hFF; while (is_nar(c, 8));
      1: do c = $urandom & 4'hF; while (is_nar(c, 4));
      default: c = $urandom & 4'hF;
    endcase
    if ($urandom % 10 == 0) c = 0;
    return c;
  endfunction

  function automatic logic [15:0] rnd_word(int p);
    logic [15:0] w;
    w = '0;
    for (int l = 0; l < nlanes(p); l++) w |= 16'(rnd_code(p) << (lbits(p) * l));
    return w;
  endfunction

  function automatic logic [15:0] addr(int region, int bank, int word);
    return 16'((region << 14) | (bank << 10) | (word << 2));
  endfunction

  task automatic run_tile(int p, int k, int ib, int wb, int ob, bit relu, bit inject_nar);
    logic [31:0] r;
    int          exp_cycles;
    for (int i = 0; i < ROWS; i++)
      for (int t = 0; t < k; t++) begin
        ifw[i][ib + t] = rnd_word(p);
        host.write(addr(1, i, ib + t), {16'h0, ifw[i][ib + t]});
      end
    for (int j = 0; j < COLS; j++)
      for (int t = 0; t < k; t++) begin
        wtw[j][wb + t] = rnd_word(p);
        if (inject_nar && j == 2 && t == 0 && p != 0) wtw[j][wb + t] = 16'(1 << (lbits(p) - 1));
        host.write(addr(2, j, wb + t), {16'h0, wtw[j][wb + t]});
      end
    host.write(16'h0004, {29'b0, relu, 2'(p)});
    host.write(16'h0008, 32'(k));
    host.write(16'h000C, 32'(ib));
    host.write(16'h0010, 32'(wb));
    host.write(16'h0014, 32'(ob));
    host.write(16'h0000, 32'h1);
    // a bank access while the tile runs must be refused
    begin
      int n_before;
      n_before = host.slverr;
      host.read(addr(1, 0, 0), r);
      checks++;
      if (busy) begin
        if (host.slverr != n_before + 1) begin failures++; $display("no SLVERR while busy"); end
        else n_busyerr++;
      end else if (host.slverr != n_before) begin
        failures++; $display("SLVERR while idle");
      end
    end
    do host.read(16'h0018, r); while (r[1] != 1'b1);
    host.read(16'h001C, r);
    exp_cycles = k + 7 + COLS;
    checks++;
    if (r != 32'(exp_cycles)) begin failures++; $display("cycles %0d expected %0d", r, exp_cycles); end
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        host.read(addr(3, i, ob + j), r);
        for (int l = 0; l < nlanes(p); l++) begin
          real s;
          bit  nar;
          int unsigned w, got, ec;
          w = lbits(p);
          s = 0.0;
          nar = 0;
          for (int t = 0; t < k; t++) begin
            int unsigned ca, cb;
            ca = (ifw[i][ib + t] >> (w * l)) & ((1 << w) - 1);
            cb = (wtw[j][wb + t] >> (w * l)) & ((1 << w) - 1);
            if (ca == 0 || cb == 0) n_zero++;
            nar |= lane_nar(p, ca) | lane_nar(p, cb);
            s += lane_val(p, ca) * lane_val(p, cb);
          end
          ec = nar ? (1 << (w - 1)) : lane_round(p, s);
          if (relu && !nar && s < 0.0) begin ec = 0; n_relu++; end
          if (nar) n_nar++;
          if (p != 0 && !nar && (ec & ((1 << (w - 1)) - 1)) == ((1 << (w - 1)) - 1)) n_sat++;
          if (p == 0 && (ec & 7) == 7) n_sat++;
          got = (r >> (w * l)) & ((1 << w) - 1);
          checks++;
          if (got != ec) begin
            failures++;
            $display("p%0d C[%0d][%0d] lane %0d: got %h expected %h (sum %g)", p, i, j, l, got, ec, s);
          end
        end
      end
    n_mode[p]++;
  endtask

  initial begin
    int last;
    repeat (4) @(negedge clk);
    rst = 0;
    last = -1;
    for (int rep = 0; rep < 2; rep++)
      for (int p = 0; p < 4; p++) begin
        if (last >= 0 && last != p) n_switch++;
        run_tile(p, (p == 3) ? 6 + 4 * rep : 12 + 8 * rep, 3 * rep, 40 + rep, 100 + 8 * rep,
                 bit'(rep), bit'(rep == 1));
        last = p;
      end
    $display("modes fp4=%0d p4=%0d p8=%0d p16=%0d switches=%0d relu=%0d zero=%0d nar=%0d sat=%0d busyerr=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_switch, n_relu, n_zero, n_nar, n_sat,
             n_busyerr);
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_mode[3] == 0 || n_switch == 0 ||
        n_relu == 0 || n_zero == 0 || n_nar == 0 || n_sat == 0 || n_busyerr == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
