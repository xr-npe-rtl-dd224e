// tb_xr_ctrl_fsm: runs tiles of random depth and base addresses with an
// array model that raises of_valid 5 cycles after the last feed word. Checks
// the bank reads (K consecutive cycles at base+k), the feed strobes one cycle
// later (clear on the first, last on the last), the OF drain (COLS writes at
// of_base+j with of_col = j), a single done pulse, busy, the CYCLES count of
// K + 7 + COLS, and that K = 0 ends at once.
module tb_xr_ctrl_fsm;
  localparam int C = 8;
  logic clk = 0, rst = 1;
  logic start = 0;
  logic [8:0] k_len = '0;
  logic [7:0] if_base = '0, wt_base = '0, of_base = '0;
  logic busy, done, rd_en, feed_valid, feed_clear, feed_last, of_valid = 0, of_we;
  logic [31:0] cycles;
  logic [7:0] if_addr, wt_addr, of_addr;
  logic [2:0] of_col;
  int checks = 0, failures = 0;

  xr_ctrl_fsm #(.COLS(C)) dut (.*);
  always #5 clk = ~clk;

  // array model
  logic [4:0] tag;
  always_ff @(posedge clk) begin
    if (rst) begin
      tag <= '0;
      of_valid <= 1'b0;
    end else begin
      tag <= {tag[3:0], feed_valid & feed_last};
      of_valid <= tag[3];
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("%s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 30; t++) begin
      int k, nrd, nfeed, nwr, ndone, ncyc;
      k = (t == 3) ? 0 : 1 + $urandom % 20;
      k_len = 9'(k);
      if_base = 8'($urandom); wt_base = 8'($urandom); of_base = 8'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      nrd = 0; nfeed = 0; nwr = 0; ndone = 0; ncyc = 0;
      if (done) ndone++;
      while (busy || ncyc == 0) begin
        ncyc++;
        if (rd_en) begin
          chk(if_addr == 8'(if_base + nrd) && wt_addr == 8'(wt_base + nrd), "read address");
          nrd++;
        end
        if (feed_valid) begin
          chk(feed_clear == (nfeed == 0) && feed_last == (nfeed == k - 1), "feed flags");
          chk(nfeed < nrd, "feed before read");
          nfeed++;
        end
        if (of_we) begin
          chk(of_addr == 8'(of_base + nwr) && 32'(of_col) == nwr, "drain address");
          nwr++;
        end
        @(negedge clk);
        if (done) ndone++;
        if (ncyc > 100) break;
      end
      @(negedge clk);
      if (done) ndone++;
      chk(nrd == k && nfeed == k && nwr == ((k == 0) ? 0 : C), $sformatf("counts %0d %0d %0d", nrd, nfeed, nwr));
      chk(ndone == 1, "done pulses");
      if (k > 0) chk(cycles == 32'(k + 7 + C), $sformatf("cycles %0d expected %0d", cycles, k + 7 + C));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
