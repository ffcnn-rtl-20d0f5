// ffcnn_lrn_tb: self-checking test of the LRN kernel.
//
// Random pixels (LANE = 8) go through the kernel with AlexNet's settings
// (n = 5, k = 2, alpha = 1e-4, beta = 0.75) and with a larger alpha and
// n = 3 so that the neighbour sum matters, then with LRN off. The expected
// value b_c = a_c * (k + alpha/n * sum a_j^2)^(-beta), with the window cut
// at the edges of the LANE group, is computed in double precision with the
// real power operator and must match within 5e-4 (relative). With LRN off
// the values must pass unchanged. The two-cycle latency is checked.
module ffcnn_lrn_tb;
  import ffcnn_pkg::*;
  import ffcnn_tb_pkg::*;
  localparam int LANE = 8;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LANE*32-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  real want[$];
  logic [31:0] raw[$];

  ffcnn_lrn #(.LANE(LANE)) dut (.*);

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

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      for (int c = 0; c < LANE; c++) begin
        real w;
        logic [31:0] r;
        w = want.pop_front();
        r = raw.pop_front();
        if (cfg.lrn_en)
          check(close(out_data[c*32 +: 32], w, rabs(w), 5.0e-4),
                $sformatf("lane %0d got %g want %g", c, f2r(out_data[c*32 +: 32]), w));
        else
          check(out_data[c*32 +: 32] == r, "bypass changed the value");
      end
    end
  end

  task automatic send(input real k, input real alpha, input real beta, input int n, input bit en, input int count);
    cfg = '0;
    cfg.lrn_en = en;
    cfg.lrn_n = 3'(n);
    cfg.lrn_k = r2f(k);
    cfg.lrn_alpha_n = r2f(alpha / n);
    cfg.lrn_beta = 16'($rtoi(beta * 16384.0));
    for (int p = 0; p < count; p++) begin
      logic [31:0] v[LANE];
      for (int c = 0; c < LANE; c++) begin
        v[c] = rand_f(4);
        in_data[c*32 +: 32] = v[c];
      end
      for (int c = 0; c < LANE; c++) begin
        real s;
        s = 0.0;
        for (int j = c - (n - 1) / 2; j <= c + (n - 1) / 2; j++)
          if (j >= 0 && j < LANE) s += f2r(v[j]) * f2r(v[j]);
        want.push_back(f2r(v[c]) * ((f2r(cfg.lrn_k) + f2r(cfg.lrn_alpha_n) * s) ** (-real'(cfg.lrn_beta) / 16384.0)));
        raw.push_back(v[c]);
      end
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    while (want.size() != 0) @(negedge clk);
  endtask

  initial begin
    int lat;
    in_valid = 0; in_data = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send(2.0, 1.0e-4, 0.75, 5, 1, 200);
    send(1.0, 0.5, 0.75, 3, 1, 200);
    send(1.0, 2.0, 0.6, 5, 1, 100);
    send(2.0, 1.0e-4, 0.75, 5, 0, 50);
    // latency with the output always taken
    @(negedge clk);
    force out_ready = 1'b1;
    in_valid = 1; for (int c = 0; c < LANE; c++) raw.push_back(in_data[c*32 +: 32]);
    for (int c = 0; c < LANE; c++) want.push_back(0.0);
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    check(lat == 2, $sformatf("latency %0d want 2", lat));
    @(negedge clk);
    release out_ready;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
