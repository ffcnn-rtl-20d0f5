// ffcnn_layer_config_tb: self-checking test of the layer table and sequencer.
//
// Writes distinct descriptors into a table of 8, runs 5 layers and then 1
// layer, answering each layer_start with layer_done after a random delay.
// Checks that every layer starts exactly once, in order, with its own
// descriptor on layer_cfg, that layer_start is high in the second cycle
// after the previous layer_done, that busy covers the run and that done pulses once at
// the end; a run of zero layers must finish at once.
module ffcnn_layer_config_tb;
  import ffcnn_pkg::*;
  localparam int ML = 8;
  logic clk = 0, rst_n = 0, cfg_we = 0, start = 0;
  logic [$clog2(ML)-1:0] cfg_addr = 0, layer_idx;
  layer_cfg_t cfg_wdata, layer_cfg;
  logic [$clog2(ML+1)-1:0] num_layers = 0;
  logic layer_start, layer_done = 0, busy, done;
  int checks = 0, failures = 0, starts = 0, dones = 0, last_done_cyc = -10, cyc = 0;

  ffcnn_layer_config #(.MAX_LAYERS(ML)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic layer_cfg_t desc(input int i);
    layer_cfg_t d;
    d = '0;
    d.in_h = 12'(100 + i); d.k = 4'(i + 1); d.base_w = 32'(1000 * i + 7); d.lrn_beta = 16'(i * 3);
    return d;
  endfunction

  // model of the kernels: finish each layer after a random delay
  always @(posedge clk) begin
    cyc++;
    if (done) dones++;
    if (layer_done) last_done_cyc = cyc;
    if (layer_start) begin
      check(layer_cfg == desc(int'(layer_idx)), $sformatf("descriptor of layer %0d", layer_idx));
      check(int'(layer_idx) == starts, $sformatf("layer %0d started, want %0d", layer_idx, starts));
      if (starts > 0) check(cyc == last_done_cyc + 2, "layer_start is high in the second cycle after layer_done");
      check(busy, "busy during a layer");
      starts++;
      fork
        begin
          repeat ($urandom_range(1, 6)) @(posedge clk);
          #1 layer_done = 1;
          @(posedge clk);
          #1 layer_done = 0;
        end
      join_none
    end
  end

  task automatic run(input int n);
    int s0, d0;
    s0 = starts; d0 = dones; starts = 0;
    @(negedge clk); num_layers = 4'(n); start = 1; @(negedge clk); start = 0;
    while (dones == d0) @(negedge clk);
    @(negedge clk);
    check(starts == n, $sformatf("%0d layers started, want %0d", starts, n));
    check(dones == d0 + 1, "one done pulse");
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < ML; i++) begin
      cfg_we = 1; cfg_addr = 3'(i); cfg_wdata = desc(i);
      @(negedge clk);
    end
    cfg_we = 0;
    check(!busy, "idle before start");
    run(5);
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
