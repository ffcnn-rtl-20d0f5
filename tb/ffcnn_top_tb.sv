// ffcnn_top_tb: end-to-end test of the accelerator at its default sizes
// (VEC = LANE = 16, no parameter overrides).
//
// A two-layer network is loaded into the behavioural global memory and run
// with a single start command:
//   layer 0: 7x7 input, 16 channels, 32 output features (two LANE groups),
//            3x3 convolution, stride 1, padding 1, ReLU, 3x3 max pooling
//            with stride 2, LRN (n = 5, k = 1, alpha = 0.5, beta = 0.75);
//            result 3x3x32;
//   layer 1: reads the second 16 channels of layer 0's result only (a
//            channel group), 2x2 convolution, no padding, 16 features,
//            no ReLU, no pooling, no LRN; result 2x2x16.
// The expected results are computed here in double precision: layer 0 from
// the random inputs, layer 1 from the layer-0 values the accelerator wrote
// (so errors do not compound). The memory stalls reads and writes at random
// and blocks writes for 1100 cycles so that the channels fill up.
// The test also counts the mechanisms of the design and fails if one never
// happened: zero padding, weight-buffer reloads, pooling on and off, LRN on
// and off, ReLU clipping, memory stalls, backpressure between kernels, and
// the switch from one layer to the next.
module ffcnn_top_tb;
  import ffcnn_pkg::*;
  import ffcnn_tb_pkg::*;
  localparam int VEC = 16, LANE = 16;
  localparam int MAXL = 64;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, start = 0, busy, done;
  logic [5:0] cfg_addr = 0;
  layer_cfg_t cfg_wdata;
  logic [6:0] num_layers = 0;
  logic mem_rd_req_valid, mem_rd_req_ready, mem_rd_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [VEC*32-1:0] mem_rd_rsp_data, mem_wr_data;
  int checks = 0, failures = 0;

  ffcnn_top dut (.*);
  ffcnn_mem_model #(.VEC(VEC), .DEPTH(4096), .LAT(5), .STALL(1)) mem (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_pad = 0, n_wload = 0, n_pool_on = 0, n_pool_off = 0, n_lrn_on = 0, n_lrn_off = 0;
  int n_relu = 0, n_backpressure = 0, n_layers = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.ev_pad) n_pad++;
    if (dut.ev_wload) n_wload++;
    if (dut.layer_start) n_layers++;
    if (dut.u_pool.in_valid && dut.u_pool.in_ready) begin
      if (dut.cfg.pool_en) n_pool_on++; else n_pool_off++;
    end
    if (dut.u_lrn.in_valid && dut.u_lrn.in_ready) begin
      if (dut.cfg.lrn_en) n_lrn_on++; else n_lrn_off++;
    end
    if (dut.u_conv.in_valid && dut.u_conv.out_valid && dut.u_conv.out_ready)
      for (int l = 0; l < LANE; l++)
        if (dut.cfg.relu_en && dut.u_conv.tree_sum[l][31]) n_relu++;
    if ((dut.d2c_valid && !dut.d2c_ready) || (dut.c_valid && !dut.c_ready) ||
        (dut.p_valid && !dut.p_ready) || (dut.l_valid && !dut.l_ready)) n_backpressure++;
  end

  // network description
  localparam int H0 = 7, C0 = 16, F0 = 32, K0 = 3, CH0 = 7, PH0 = 3;
  localparam int K1 = 2, F1 = 16, CH1 = 2;
  localparam int IN0 = 0, W0 = 100, B0 = 500, OUT0 = 600, W1 = 700, B1 = 800, OUT1 = 900;

  function automatic real mval(input int addr, input int e);
    return f2r(mem.mem[addr][e*32 +: 32]);
  endfunction

  initial begin
    layer_cfg_t l0, l1;
    real conv0[F0][CH0][CH0], scale0[F0][CH0][CH0];
    real pool0[F0][PH0][PH0], ps0[F0][PH0][PH0];
    int  cyc0;

    // memory contents
    for (int i = 0; i < 4096; i++) mem.mem[i] = '0;
    for (int p = 0; p < H0 * H0; p++)
      for (int c = 0; c < C0; c++) mem.mem[IN0 + p][c*32 +: 32] = rand_f(0);
    for (int f = 0; f < F0; f++)
      for (int j = 0; j < K0 * K0; j++)
        for (int c = 0; c < VEC; c++) mem.mem[W0 + f * K0 * K0 + j][c*32 +: 32] = rand_f(-2);
    for (int g = 0; g < F0 / LANE; g++)
      for (int c = 0; c < VEC; c++) mem.mem[B0 + g][c*32 +: 32] = rand_f(-1);
    for (int f = 0; f < F1; f++)
      for (int j = 0; j < K1 * K1; j++)
        for (int c = 0; c < VEC; c++) mem.mem[W1 + f * K1 * K1 + j][c*32 +: 32] = rand_f(-1);
    for (int c = 0; c < VEC; c++) mem.mem[B1][c*32 +: 32] = rand_f(-1);

    // descriptors
    l0 = '0;
    l0.in_h = 12'(H0); l0.in_w = 12'(H0); l0.in_cv = 10'd1; l0.in_cv_off = 10'd0; l0.in_cv_n = 10'd1;
    l0.k = 4'(K0); l0.stride = 3'd1; l0.pad = 3'd1;
    l0.conv_h = 12'(CH0); l0.conv_w = 12'(CH0); l0.groups = 10'(F0 / LANE); l0.relu_en = 1'b1;
    l0.pool_en = 1'b1; l0.pool_size = 2'd3; l0.pool_stride = 3'd2; l0.pool_h = 12'(PH0); l0.pool_w = 12'(PH0);
    l0.lrn_en = 1'b1; l0.lrn_n = 3'd5; l0.lrn_k = r2f(1.0); l0.lrn_alpha_n = r2f(0.5 / 5.0);
    l0.lrn_beta = 16'(12288);
    l0.out_cv = 10'd2; l0.out_cv_off = 10'd0;
    l0.base_in = 32'(IN0); l0.base_w = 32'(W0); l0.base_b = 32'(B0); l0.base_out = 32'(OUT0);
    l1 = '0;
    l1.in_h = 12'(PH0); l1.in_w = 12'(PH0); l1.in_cv = 10'd2; l1.in_cv_off = 10'd1; l1.in_cv_n = 10'd1;
    l1.k = 4'(K1); l1.stride = 3'd1; l1.pad = 3'd0;
    l1.conv_h = 12'(CH1); l1.conv_w = 12'(CH1); l1.groups = 10'd1;
    l1.out_cv = 10'd1; l1.base_in = 32'(OUT0); l1.base_w = 32'(W1); l1.base_b = 32'(B1); l1.base_out = 32'(OUT1);

    // reference for layer 0
    for (int f = 0; f < F0; f++)
      for (int y = 0; y < CH0; y++)
        for (int x = 0; x < CH0; x++) begin
          real s, sc;
          s = mval(B0 + f / LANE, f % LANE); sc = rabs(s);
          for (int ky = 0; ky < K0; ky++)
            for (int kx = 0; kx < K0; kx++) begin
              int iy, ix;
              iy = y + ky - 1; ix = x + kx - 1;
              if (iy >= 0 && iy < H0 && ix >= 0 && ix < H0)
                for (int c = 0; c < C0; c++) begin
                  real t;
                  t = mval(W0 + f * K0 * K0 + ky * K0 + kx, c) * mval(IN0 + iy * H0 + ix, c);
                  s += t; sc += rabs(t);
                end
            end
          conv0[f][y][x] = (s < 0.0) ? 0.0 : s;
          scale0[f][y][x] = sc;
        end
    for (int f = 0; f < F0; f++)
      for (int py = 0; py < PH0; py++)
        for (int px = 0; px < PH0; px++) begin
          real m, ms;
          m = conv0[f][2*py][2*px]; ms = 0.0;
          for (int dy = 0; dy < 3; dy++)
            for (int dx = 0; dx < 3; dx++) begin
              if (conv0[f][2*py+dy][2*px+dx] > m) m = conv0[f][2*py+dy][2*px+dx];
              if (scale0[f][2*py+dy][2*px+dx] > ms) ms = scale0[f][2*py+dy][2*px+dx];
            end
          pool0[f][py][px] = m; ps0[f][py][px] = ms;
        end

    // host: write descriptors and start
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 0; cfg_wdata = l0; @(negedge clk);
    cfg_addr = 1; cfg_wdata = l1; @(negedge clk);
    cfg_we = 0;
    num_layers = 7'd2; start = 1; @(negedge clk); start = 0;
    cyc0 = 0;
    while (!done) begin
      @(negedge clk); cyc0++;
      // block global-memory writes for a while so that the channels fill up
      mem.wr_hold = (cyc0 >= 200 && cyc0 < 1300);
    end
    $display("network finished in %0d cycles", cyc0);

    // layer 0 results: LRN over the channels of each 16-channel group
    for (int f = 0; f < F0; f++)
      for (int py = 0; py < PH0; py++)
        for (int px = 0; px < PH0; px++) begin
          real s, want;
          int g, c;
          g = f / LANE; c = f % LANE;
          s = 0.0;
          for (int j = c - 2; j <= c + 2; j++)
            if (j >= 0 && j < LANE) s += pool0[g*LANE + j][py][px] ** 2;
          want = pool0[f][py][px] * ((1.0 + 0.1 * s) ** (-0.75));
          check(close(mem.mem[OUT0 + (py * PH0 + px) * 2 + g][c*32 +: 32], want,
                      1.0e-5 * ps0[f][py][px] + 1.0e-3 * rabs(want), 1.0),
                $sformatf("layer 0 f%0d (%0d,%0d): got %g want %g", f, py, px,
                          mval(OUT0 + (py * PH0 + px) * 2 + g, c), want));
        end
    // layer 1 results, from the layer-0 values in memory (channels 16..31)
    for (int f = 0; f < F1; f++)
      for (int y = 0; y < CH1; y++)
        for (int x = 0; x < CH1; x++) begin
          real s, sc;
          s = mval(B1, f); sc = rabs(s);
          for (int ky = 0; ky < K1; ky++)
            for (int kx = 0; kx < K1; kx++)
              for (int c = 0; c < VEC; c++) begin
                real t;
                t = mval(W1 + f * K1 * K1 + ky * K1 + kx, c) * mval(OUT0 + ((y + ky) * PH0 + x + kx) * 2 + 1, c);
                s += t; sc += rabs(t);
              end
          check(close(mem.mem[OUT1 + y * CH1 + x][f*32 +: 32], s, sc, 1.0e-5),
                $sformatf("layer 1 f%0d (%0d,%0d): got %g want %g", f, y, x, mval(OUT1 + y * CH1 + x, f), s));
        end
    check(mem.bad_addr == 0, "all accesses inside the memory");

    $display("mechanisms: pad=%0d wload=%0d pool_on=%0d pool_off=%0d lrn_on=%0d lrn_off=%0d relu=%0d backpressure=%0d rd_stall=%0d wr_stall=%0d layers=%0d",
             n_pad, n_wload, n_pool_on, n_pool_off, n_lrn_on, n_lrn_off, n_relu, n_backpressure,
             mem.rd_stalls, mem.wr_stalls, n_layers);
    check(n_pad > 0, "zero padding happened");
    check(n_wload == 3, "three weight-buffer loads");
    check(n_pool_on > 0 && n_pool_off > 0, "pooling on and off");
    check(n_lrn_on > 0 && n_lrn_off > 0, "LRN on and off");
    check(n_relu > 0, "ReLU clipped a value");
    check(n_backpressure > 0, "backpressure between kernels");
    check(mem.rd_stalls > 0 && mem.wr_stalls > 0, "memory stalls");
    check(n_layers == 2, "layer switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
