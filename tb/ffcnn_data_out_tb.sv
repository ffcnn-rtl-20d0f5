// ffcnn_data_out_tb: self-checking test of the DataOut kernel.
//
// With VEC = 2 and LANE = 4 (two vector writes per beat), random result
// beats are sent for a layer with and without pooling, with a channel-group
// offset, while the memory accepts writes at random. Every write's address
// and data are compared with the address formula of the output layout
// worked out here, and layer_done must pulse exactly once, right after the
// last write.
module ffcnn_data_out_tb;
  import ffcnn_pkg::*;
  localparam int VEC = 2, LANE = 4, LV = LANE / VEC;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic in_valid, in_ready, mem_wr_valid, mem_wr_ready, layer_done;
  logic [LANE*32-1:0] in_data;
  logic [ADDR_W-1:0] mem_wr_addr;
  logic [VEC*32-1:0] mem_wr_data;
  int checks = 0, failures = 0, dones = 0, writes = 0;
  logic [ADDR_W-1:0] exp_addr[$];
  logic [VEC*32-1:0] exp_data[$];
  bit last_seen;

  ffcnn_data_out #(.VEC(VEC), .LANE(LANE)) dut (.*);

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

  always @(negedge clk) mem_wr_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (rst_n && layer_done) begin
      dones++;
      check(last_seen, "layer_done before the last write");
    end
    last_seen <= 1'b0;
    if (rst_n && mem_wr_valid && mem_wr_ready) begin
      writes++;
      if (exp_addr.size() == 0) check(0, "unexpected write");
      else begin
        logic [ADDR_W-1:0] a;
        logic [VEC*32-1:0] d;
        a = exp_addr.pop_front();
        d = exp_data.pop_front();
        check(mem_wr_addr == a, $sformatf("address %0d want %0d", mem_wr_addr, a));
        check(mem_wr_data == d, "data");
        last_seen <= (exp_addr.size() == 0);
      end
    end
  end

  task automatic run(input bit pool, input int h, input int w, input int groups, input int cvoff);
    int n0;
    cfg = '0;
    cfg.pool_en = pool;
    if (pool) begin cfg.pool_h = 12'(h); cfg.pool_w = 12'(w); cfg.conv_h = 12'(2*h+1); cfg.conv_w = 12'(2*w+1); end
    else      begin cfg.conv_h = 12'(h); cfg.conv_w = 12'(w); cfg.pool_h = 12'd1; cfg.pool_w = 12'd1; end
    cfg.groups = 10'(groups);
    cfg.out_cv = 10'(groups * LV + cvoff + 1);
    cfg.out_cv_off = 10'(cvoff);
    cfg.base_out = 32'h1000;
    n0 = dones;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < groups; g++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          for (int l = 0; l < LANE; l++) in_data[l*32 +: 32] = $urandom;
          for (int v = 0; v < LV; v++) begin
            exp_addr.push_back(32'h1000 + (y * w + x) * (groups * LV + cvoff + 1) + cvoff + g * LV + v);
            exp_data.push_back(in_data[v*VEC*32 +: VEC*32]);
          end
          in_valid = 1;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
          in_valid = 0;
        end
    while (exp_addr.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(dones == n0 + 1, $sformatf("layer_done pulses %0d want 1", dones - n0));
  endtask

  initial begin
    in_valid = 0; in_data = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 3, 4, 2, 0);
    run(1, 2, 3, 3, 1);
    run(0, 1, 1, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
