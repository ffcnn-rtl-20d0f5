// ffcnn_alexnet_tb: the first two layers of AlexNet, at their real sizes, on
// the accelerator at its default sizes (no parameter overrides).
//
// Weights and the input image are random; the layer shapes are AlexNet's:
//   conv1: 227x227x3 input (channels padded to 16), 96 filters 11x11,
//          stride 4 -> 55x55, ReLU, 3x3/2 max pooling -> 27x27, then LRN
//          (n = 5, k = 2, alpha = 1e-4, beta = 0.75), the pipeline's order
//          (pooling before normalization, as in CaffeNet; the original
//          AlexNet normalizes first);
//   conv2: two channel groups of 48 input channels (three vectors each),
//          128 filters 5x5 per group, padding 2 -> 27x27, ReLU, 3x3/2 max
//          pooling -> 13x13, LRN; the two groups are two descriptors writing
//          the two halves of the 256-channel output.
// Expected values are computed in double precision for a random sample of
// output positions (conv2 from the conv1 result the accelerator wrote). The
// cycle count of each layer is compared with the number of beats the
// convolution kernel must take (one per cycle plus weight loading).
module ffcnn_alexnet_tb;
  import ffcnn_pkg::*;
  import ffcnn_tb_pkg::*;
  localparam int VEC = 16, LANE = 16;
  localparam int MEMV = 131072;
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
  ffcnn_mem_model #(.VEC(VEC), .DEPTH(MEMV), .LAT(5), .STALL(0)) mem (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory map (vectors)
  localparam int IMG = 0;          // 227*227 = 51529
  localparam int W1  = 52000;      // 96 * 121 = 11616
  localparam int B1  = 63700;      // 6
  localparam int O1  = 63800;      // 27*27*6 = 4374
  localparam int W2  = 68200;      // 256 * 75 = 19200
  localparam int B2  = 87400;      // 16
  localparam int O2  = 87500;      // 13*13*16 = 2704

  // loop bounds of the reference sums, held in variables so that the
  // simulator compiles the loops as loops
  int k1 = 11, nc1 = 3, k2 = 5, ncv2 = 3, nch = 16, pw = 3;

  function automatic real mv(input int addr, input int e);
    return f2r(mem.mem[addr][e*32 +: 32]);
  endfunction

  // conv1 with ReLU at output (f, y, x)
  function automatic real conv1(input int f, input int y, input int x, output real sc);
    real s;
    s = mv(B1 + f / 16, f % 16); sc = rabs(s);
    for (int ky = 0; ky < k1; ky++)
      for (int kx = 0; kx < k1; kx++)
        for (int c = 0; c < nc1; c++) begin
          real t;
          t = mv(W1 + f * 121 + ky * 11 + kx, c) * mv(IMG + (4 * y + ky) * 227 + 4 * x + kx, c);
          s += t; sc += rabs(t);
        end
    return (s < 0.0) ? 0.0 : s;
  endfunction

  // conv2 (group gi = f/128) with ReLU, reading conv1's result from memory
  function automatic real conv2(input int f, input int y, input int x, output real sc);
    real s;
    int gi;
    gi = f / 128;
    s = mv(B2 + f / 16, f % 16); sc = rabs(s);
    for (int ky = 0; ky < k2; ky++)
      for (int kx = 0; kx < k2; kx++) begin
        int iy, ix;
        iy = y + ky - 2; ix = x + kx - 2;
        if (iy >= 0 && iy < 27 && ix >= 0 && ix < 27)
          for (int cv = 0; cv < ncv2; cv++)
            for (int c = 0; c < nch; c++) begin
              real t;
              t = mv(W2 + (f % 128 + gi * 128) * 75 + (ky * 5 + kx) * 3 + cv, c)
                * mv(O1 + (iy * 27 + ix) * 6 + gi * 3 + cv, c);
              s += t; sc += rabs(t);
            end
      end
    return (s < 0.0) ? 0.0 : s;
  endfunction

  // pooled value and the largest term-magnitude sum of its window
  function automatic real pooled(input int layer, input int f, input int py, input int px, output real ms);
    real m, v, sc;
    m = -1.0; ms = 0.0;
    for (int dy = 0; dy < pw; dy++)
      for (int dx = 0; dx < pw; dx++) begin
        v = (layer == 1) ? conv1(f, 2 * py + dy, 2 * px + dx, sc) : conv2(f, 2 * py + dy, 2 * px + dx, sc);
        if (v > m) m = v;
        if (sc > ms) ms = sc;
      end
    return m;
  endfunction

  task automatic check_pixel(input int layer, input int py, input int px, input int g);
    real p[16], ps[16], s, want;
    int base, ncv;
    base = (layer == 1) ? O1 : O2;
    ncv  = (layer == 1) ? 6 : 16;
    for (int c = 0; c < nch; c++) p[c] = pooled(layer, g * 16 + c, py, px, ps[c]);
    for (int c = 0; c < nch; c++) begin
      s = 0.0;
      for (int j = c - 2; j <= c + 2; j++) if (j >= 0 && j < 16) s += p[j] * p[j];
      want = p[c] * ((2.0 + 1.0e-4 / 5.0 * s) ** (-0.75));
      check(close(mem.mem[base + (py * ((layer == 1) ? 27 : 13) + px) * ncv + g][c*32 +: 32], want,
                  1.0e-5 * ps[c] + 1.0e-3 * rabs(want), 1.0),
            $sformatf("layer %0d f%0d (%0d,%0d): got %g want %g", layer, g * 16 + c, py, px,
                      mv(base + (py * ((layer == 1) ? 27 : 13) + px) * ncv + g, c), want));
    end
  endtask

  function automatic layer_cfg_t lrn_on(input layer_cfg_t d);
    d.lrn_en = 1'b1; d.lrn_n = 3'd5; d.lrn_k = r2f(2.0); d.lrn_alpha_n = r2f(1.0e-4 / 5.0);
    d.lrn_beta = 16'(12288);
    return d;
  endfunction

  initial begin
    layer_cfg_t c1, c2a, c2b;
    int cyc, t1;
    // memory: image (3 real channels of 16), weights, biases
    for (int i = 0; i < 227 * 227; i++) begin
      mem.mem[IMG + i] = '0;
      for (int c = 0; c < 3; c++) mem.mem[IMG + i][c*32 +: 32] = rand_f(0);
    end
    for (int i = 0; i < 96 * 121; i++) begin
      mem.mem[W1 + i] = '0;
      for (int c = 0; c < 3; c++) mem.mem[W1 + i][c*32 +: 32] = rand_f(-3);
    end
    for (int i = 0; i < 6; i++)
      for (int c = 0; c < 16; c++) mem.mem[B1 + i][c*32 +: 32] = rand_f(-2);
    for (int i = 0; i < 256 * 75; i++)
      for (int c = 0; c < 16; c++) mem.mem[W2 + i][c*32 +: 32] = rand_f(-5);
    for (int i = 0; i < 16; i++)
      for (int c = 0; c < 16; c++) mem.mem[B2 + i][c*32 +: 32] = rand_f(-2);

    c1 = '0;
    c1.in_h = 12'd227; c1.in_w = 12'd227; c1.in_cv = 10'd1; c1.in_cv_n = 10'd1;
    c1.k = 4'd11; c1.stride = 3'd4; c1.pad = 3'd0; c1.conv_h = 12'd55; c1.conv_w = 12'd55;
    c1.groups = 10'd6; c1.relu_en = 1'b1;
    c1.pool_en = 1'b1; c1.pool_size = 2'd3; c1.pool_stride = 3'd2; c1.pool_h = 12'd27; c1.pool_w = 12'd27;
    c1 = lrn_on(c1);
    c1.out_cv = 10'd6; c1.base_in = 32'(IMG); c1.base_w = 32'(W1); c1.base_b = 32'(B1); c1.base_out = 32'(O1);
    c2a = '0;
    c2a.in_h = 12'd27; c2a.in_w = 12'd27; c2a.in_cv = 10'd6; c2a.in_cv_off = 10'd0; c2a.in_cv_n = 10'd3;
    c2a.k = 4'd5; c2a.stride = 3'd1; c2a.pad = 3'd2; c2a.conv_h = 12'd27; c2a.conv_w = 12'd27;
    c2a.groups = 10'd8; c2a.relu_en = 1'b1;
    c2a.pool_en = 1'b1; c2a.pool_size = 2'd3; c2a.pool_stride = 3'd2; c2a.pool_h = 12'd13; c2a.pool_w = 12'd13;
    c2a = lrn_on(c2a);
    c2a.out_cv = 10'd16; c2a.out_cv_off = 10'd0;
    c2a.base_in = 32'(O1); c2a.base_w = 32'(W2); c2a.base_b = 32'(B2); c2a.base_out = 32'(O2);
    c2b = c2a;
    c2b.in_cv_off = 10'd3; c2b.out_cv_off = 10'd8;
    c2b.base_w = 32'(W2 + 128 * 75); c2b.base_b = 32'(B2 + 8);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = 0; cfg_wdata = c1;  @(negedge clk);
    cfg_addr = 1; cfg_wdata = c2a; @(negedge clk);
    cfg_addr = 2; cfg_wdata = c2b; @(negedge clk);
    cfg_we = 0;
    num_layers = 7'd3; start = 1; @(negedge clk); start = 0;
    cyc = 0; t1 = 0;
    while (!done) begin
      @(negedge clk); cyc++;
      if (dut.layer_done && t1 == 0) t1 = cyc;
    end
    $display("conv1 layer: %0d cycles for %0d beats (%0d weight vectors)", t1, 6 * 55 * 55 * 121, 96 * 121);
    $display("conv2 layers: %0d cycles for %0d beats (%0d weight vectors)", cyc - t1, 16 * 27 * 27 * 75, 256 * 75);
    // one beat per cycle while streaming, plus the weight loads, plus at most 1% for group switches
    check(real'(t1) <= 1.01 * real'(6 * 55 * 55 * 121 + 96 * 121 + 6), "conv1 runs at one beat per cycle");
    check(real'(cyc - t1) <= 1.01 * real'(16 * 27 * 27 * 75 + 256 * 75 + 16), "conv2 runs at one beat per cycle");

    // sample positions: random ones plus the corners, checked from one call site
    for (int n = 0; n < 28; n++) begin
      int layer, py, px, g, last;
      layer = (n < 14) ? 1 : 2;
      last  = (layer == 1) ? 26 : 12;
      if (n == 12 || n == 26)      begin py = 0; px = 0; g = 0; end
      else if (n == 13 || n == 27) begin py = last; px = last; g = (layer == 1) ? 5 : 15; end
      else begin
        py = $urandom_range(0, last); px = $urandom_range(0, last);
        g  = $urandom_range(0, (layer == 1) ? 5 : 15);
      end
      check_pixel(layer, py, px, g);
    end
    check(mem.bad_addr == 0, "all accesses inside the memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
