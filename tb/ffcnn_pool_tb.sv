// ffcnn_pool_tb: self-checking test of the max-pooling kernel.
//
// Streams random feature maps (LANE = 2, two groups per layer) through the
// kernel for 3x3 windows with stride 2 (AlexNet's overlapping pooling),
// 2x2 stride 2, 3x3 stride 1, and with pooling off (pass-through), with
// random gaps on the input and random backpressure on the output. Each
// output value must equal the maximum of its window, found by searching the
// window in the testbench; the number of outputs must match the pooled size.
module ffcnn_pool_tb;
  import ffcnn_pkg::*;
  import ffcnn_tb_pkg::*;
  localparam int LANE = 2, W_MAX = 16;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LANE*32-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [31:0] expq[$];
  int outs;

  ffcnn_pool #(.LANE(LANE), .W_MAX(W_MAX)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      outs++;
      for (int l = 0; l < LANE; l++) begin
        if (expq.size() == 0) check(0, "unexpected output");
        else begin
          logic [31:0] e;
          e = expq.pop_front();
          check(out_data[l*32 +: 32] == e, $sformatf("got %g want %g",
                f2r(out_data[l*32 +: 32]), f2r(e)));
        end
      end
    end
  end

  task automatic run(input int h, input int w, input int p, input int s, input bit en, input int groups);
    logic [31:0] m[][][];
    int ph, pw;
    ph = en ? (h - p) / s + 1 : h;
    pw = en ? (w - p) / s + 1 : w;
    cfg = '0;
    cfg.conv_h = 12'(h); cfg.conv_w = 12'(w); cfg.groups = 10'(groups);
    cfg.pool_en = en; cfg.pool_size = 2'(p); cfg.pool_stride = 3'(s);
    cfg.pool_h = 12'(ph); cfg.pool_w = 12'(pw);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    outs = 0;
    for (int g = 0; g < groups; g++) begin
      m = new[h];
      for (int y = 0; y < h; y++) begin
        m[y] = new[w];
        for (int x = 0; x < w; x++) begin
          m[y][x] = new[LANE];
          for (int l = 0; l < LANE; l++) m[y][x][l] = rand_f(2);
        end
      end
      for (int py = 0; py < ph; py++)
        for (int px = 0; px < pw; px++)
          for (int l = 0; l < LANE; l++) begin
            logic [31:0] best;
            if (!en) best = m[py][px][l];
            else begin
              best = m[py*s][px*s][l];
              for (int dy = 0; dy < p; dy++)
                for (int dx = 0; dx < p; dx++)
                  if (f2r(m[py*s+dy][px*s+dx][l]) > f2r(best)) best = m[py*s+dy][px*s+dx][l];
            end
            expq.push_back(best);
          end
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          for (int l = 0; l < LANE; l++) in_data[l*32 +: 32] = m[y][x][l];
          in_valid = 1;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
          in_valid = 0;
          if ($urandom_range(0, 4) == 0) @(negedge clk);
        end
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(outs == ph * pw * groups, $sformatf("output count %0d want %0d", outs, ph * pw * groups));
  endtask

  initial begin
    in_valid = 0; in_data = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(9, 9, 3, 2, 1, 2);
    run(8, 6, 2, 2, 1, 2);
    run(7, 10, 3, 1, 1, 1);
    run(5, 16, 3, 3, 1, 2);
    run(4, 5, 3, 2, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
