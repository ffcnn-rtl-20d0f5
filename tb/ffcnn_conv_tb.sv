// ffcnn_conv_tb: self-checking test of the convolution kernel.
//
// Drives random dot products of 1 to 7 beats per pixel (VEC = 4, LANE = 2
// for a short simulation) with random biases, with ReLU off and on, while
// the consumer throttles the output at random. Every result is compared
// with the same sum computed in double precision, within 1e-5 of the sum of
// the magnitudes of its terms. The latency of a one-beat pixel (3 cycles
// from input to output) and the one-beat-per-cycle rate are checked too.
module ffcnn_conv_tb;
  import ffcnn_tb_pkg::*;
  localparam int VEC = 4, LANE = 2;
  localparam int BW = 1 + (LANE + LANE * VEC + VEC) * 32;
  logic clk = 0, rst_n = 0, relu_en = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [BW-1:0] in_data;
  logic [LANE*32-1:0] out_data;
  int checks = 0, failures = 0;
  real want[$];    // LANE entries per expected pixel
  real scale[$];

  ffcnn_conv #(.VEC(VEC), .LANE(LANE)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer: compare with the model
  bit throttle = 0;
  always @(negedge clk) out_ready <= throttle ? ($urandom_range(0, 2) != 0) : 1'b1;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      real w[LANE], s[LANE];
      if (want.size() == 0) check(0, "unexpected output");
      else begin
        for (int l = 0; l < LANE; l++) begin
          w[l] = want.pop_front();
          s[l] = scale.pop_front();
        end
        for (int l = 0; l < LANE; l++) begin
          check(close(out_data[l*32 +: 32], w[l], s[l], 1.0e-5),
                $sformatf("lane %0d got %g want %g", l, f2r(out_data[l*32 +: 32]), w[l]));
        end
      end
    end
  end

  task automatic send_pixel(input int beats, input bit relu);
    real acc[LANE], sc[LANE], b[LANE];
    logic [31:0] bias[LANE];
    for (int l = 0; l < LANE; l++) begin
      bias[l] = rand_f(1); b[l] = f2r(bias[l]); acc[l] = 0.0; sc[l] = rabs(b[l]);
    end
    for (int t = 0; t < beats; t++) begin
      logic [BW-1:0] beat;
      beat = '0;
      beat[BW-1] = (t == beats - 1);
      for (int l = 0; l < LANE; l++) beat[(LANE*VEC+VEC+l)*32 +: 32] = bias[l];
      for (int v = 0; v < VEC; v++) begin
        logic [31:0] d;
        d = rand_f(0);
        beat[v*32 +: 32] = d;
        for (int l = 0; l < LANE; l++) begin
          logic [31:0] w;
          w = rand_f(0);
          beat[(VEC + l*VEC + v)*32 +: 32] = w;
          acc[l] += f2r(w) * f2r(d);
          sc[l]  += rabs(f2r(w) * f2r(d));
        end
      end
      in_valid = 1; in_data = beat;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0 && throttle) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    for (int l = 0; l < LANE; l++) begin
      acc[l] += b[l];
      if (relu && acc[l] < 0.0) acc[l] = 0.0;
    end
    for (int l = 0; l < LANE; l++) begin
      want.push_back(acc[l]);
      scale.push_back(sc[l]);
    end
  endtask

  initial begin
    int t0, n;
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency of a single-beat pixel
    send_pixel(1, 0);
    t0 = 0;
    while (!out_valid) begin @(negedge clk); t0++; end
    check(t0 == 2, $sformatf("latency: output %0d cycles after the input cycle's end, want 2", t0));
    @(negedge clk);
    // rate: 20 beats back to back take 20 cycles
    n = 0;
    fork
      send_pixel(20, 0);
      begin while (!out_valid) begin @(negedge clk); n++; end end
    join
    check(n == 20 + 2 - 1 || n == 20 + 2, $sformatf("rate: %0d cycles for 20 beats", n));
    repeat (4) @(negedge clk);
    // random pixels, throttled
    throttle = 1;
    for (int p = 0; p < 300; p++) begin
      relu_en = (p >= 150);
      send_pixel($urandom_range(1, 7), relu_en);
      if (p == 149) begin
        while (want.size() != 0) @(negedge clk);
      end
    end
    while (want.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
