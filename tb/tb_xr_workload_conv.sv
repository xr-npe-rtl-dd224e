// tb_xr_workload_conv: a small layer-adaptive mixed-precision CNN slice run
// on the co-processor at its default size (8x8 NPEs, 256-word banks), in
// the way the host would run a perception network layer by layer.
//
// Layer 1 is a 3x3 convolution (stride 1, no padding) of two 10x10
// single-channel image patches with 8 filters, in Posit(8,0) with ReLU: the
// host lowers it to a matrix product (one row per output pixel, one column
// per filter, K = 9 taps); lane 0 of each word carries image 0 and lane 1
// image 1, the weights are the same in both lanes. The 64 output pixels take
// 8 tiles of 8 pixels x 8 filters. Layer 2 is a 1x1 convolution (8 -> 8
// channels) in FP4: the host re-quantises the Posit(8,0) feature map to FP4
// (nearest E2M1 value) and runs 8 more tiles with K = 8, lanes 0 and 1 again
// the two images and lanes 2 and 3 left zero (gated lanes). Every output of
// both layers is compared with the real-arithmetic reference rounded to the
// layer's format; the CYCLES register of every tile is checked against
// K + 7 + COLS. The mixed Posit-8/FP4 split follows the layer-adaptive scheme
// the design targets; the layer shapes are this test's own.
module tb_xr_workload_conv;
  import xr_npe_pkg::*;
  import xr_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8, IMG = 10, OUT = 8, NF = 8;

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

  int checks = 0, failures = 0, n_tiles = 0, n_cycles = 0, n_relu = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned img [2][IMG][IMG];     // Posit(8,0) pixel codes
  int unsigned w1 [NF][9];            // Posit(8,0) 3x3 filters
  int unsigned f1 [2][OUT * OUT][NF]; // layer-1 output codes read back
  int unsigned w2 [NF][NF];           // FP4 1x1 weights [out][in]

  function automatic logic [15:0] addr(int region, int bank, int word);
    return 16'((region << 14) | (bank << 10) | (word << 2));
  endfunction

  // Posit(8,0) code with value in [1/8, 4) or zero, either sign
  function automatic int unsigned rnd_p8();
    int unsigned c;
    do c = $urandom & 8'hFF;
    while (is_nar(c, 8) || (c != 0 && (posit_scale(c, 8, 0) > 1 || posit_scale(c, 8, 0) < -3)));
    return c;
  endfunction

  // configure, start and wait for one tile; checks the cycle count
  task automatic run(int p, int k, bit relu);
    logic [31:0] r;
    host.write(16'h0004, {29'b0, relu, 2'(p)});
    host.write(16'h0008, 32'(k));
    host.write(16'h000C, 32'h0);
    host.write(16'h0010, 32'h0);
    host.write(16'h0014, 32'h0);
    host.write(16'h0000, 32'h1);
    do host.read(16'h0018, r); while (r[1] != 1'b1);
    host.read(16'h001C, r);
    checks++;
    if (r != 32'(k + 7 + COLS)) begin failures++; $display("cycles %0d for K=%0d", r, k); end
    n_tiles++;
    n_cycles += int'(r);
  endtask

  initial begin
    logic [31:0] r;
    repeat (4) @(negedge clk);
    rst = 0;
    foreach (img[n, y, x]) img[n][y][x] = rnd_p8();
    foreach (w1[f, t]) w1[f][t] = rnd_p8();
    foreach (w2[o, c]) w2[o][c] = $urandom & 4'hF;

    // layer 1: Posit(8,0), 3x3 conv with ReLU, 8 tiles of 8 pixels
    for (int j = 0; j < NF; j++)
      for (int t = 0; t < 9; t++)
        host.write(addr(2, j, t), {16'h0, 8'(w1[j][t]), 8'(w1[j][t])});
    for (int tile = 0; tile < OUT * OUT / ROWS; tile++) begin
      for (int i = 0; i < ROWS; i++) begin
        int px, y, x;
        px = tile * ROWS + i;
        y = px / OUT;
        x = px % OUT;
        for (int t = 0; t < 9; t++)
          host.write(addr(1, i, t), {16'h0, 8'(img[1][y + t / 3][x + t % 3]),
                                            8'(img[0][y + t / 3][x + t % 3])});
      end
      run(2, 9, 1'b1);
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < NF; j++) begin
          int px, y, x;
          px = tile * ROWS + i;
          y = px / OUT;
          x = px % OUT;
          host.read(addr(3, i, j), r);
          for (int n = 0; n < 2; n++) begin
            real s;
            int unsigned ec;
            s = 0.0;
            for (int t = 0; t < 9; t++)
              s += posit_val(img[n][y + t / 3][x + t % 3], 8, 0) * posit_val(w1[j][t], 8, 0);
            ec = (s < 0.0) ? 0 : to_posit(s, 8, 0);
            if (s < 0.0) n_relu++;
            f1[n][px][j] = (r >> (8 * n)) & 8'hFF;
            checks++;
            if (f1[n][px][j] != ec) begin
              failures++;
              $display("L1 img%0d px%0d f%0d: got %h expected %h (%g)", n, px, j, f1[n][px][j], ec, s);
            end
          end
        end
    end

    // layer 2: FP4, 1x1 conv 8 -> 8 channels on the re-quantised feature map
    for (int j = 0; j < NF; j++)
      for (int c = 0; c < NF; c++)
        host.write(addr(2, j, c), {16'h0, 4'h0, 4'h0, 4'(w2[j][c]), 4'(w2[j][c])});
    for (int tile = 0; tile < OUT * OUT / ROWS; tile++) begin
      for (int i = 0; i < ROWS; i++)
        for (int c = 0; c < NF; c++) begin
          int px;
          px = tile * ROWS + i;
          host.write(addr(1, i, c), {16'h0, 4'h0, 4'h0,
                                     4'(to_fp4(posit_val(f1[1][px][c], 8, 0))),
                                     4'(to_fp4(posit_val(f1[0][px][c], 8, 0)))});
        end
      run(0, NF, 1'b0);
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < NF; j++) begin
          int px;
          px = tile * ROWS + i;
          host.read(addr(3, i, j), r);
          for (int n = 0; n < 4; n++) begin
            real s;
            int unsigned ec, got;
            s = 0.0;
            if (n < 2)
              for (int c = 0; c < NF; c++)
                s += fp4_val(to_fp4(posit_val(f1[n][px][c], 8, 0))) * fp4_val(w2[j][c]);
            ec = to_fp4(s);
            got = (r >> (4 * n)) & 4'hF;
            checks++;
            if (got != ec) begin
              failures++;
              $display("L2 img%0d px%0d ch%0d: got %h expected %h (%g)", n, px, j, got, ec, s);
            end
          end
        end
    end

    $display("tiles=%0d cycles=%0d relu=%0d macs=%0d", n_tiles, n_cycles, n_relu,
             OUT * OUT * NF * 2 * 9 + OUT * OUT * NF * 2 * NF);
    checks++;
    if (n_tiles != 16 || n_relu == 0) begin failures++; $display("workload incomplete"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
