// ffcnn_data_in_tb: self-checking test of the DataIN kernel.
//
// A small configuration (VEC = 2, LANE = 2) reads from the behavioural
// global memory filled with random values. Three layers are run: a 3x3
// window with stride 2 and padding 1 over a channel group (in_cv_off = 1)
// of a 5x6 map, two feature groups; a 1x1 window; and a 2x2 window without
// padding. Every beat sent towards the convolution is compared with the
// beat built here from the memory contents: the input vector (zero where
// the window lies in the padding), the LANE weight vectors of the same
// window index, the LANE biases and the last-beat flag. The memory and the
// consumer stall at random in the first runs; in the last one neither
// stalls and the kernel must deliver one beat per cycle once the weights
// are loaded.
module ffcnn_data_in_tb;
  import ffcnn_pkg::*;
  localparam int VEC = 2, LANE = 2, LV = LANE / VEC, WBUF = 64, MO = 8;
  localparam int BW = 1 + (LANE + LANE * VEC + VEC) * 32;
  logic clk = 0, rst_n = 0, start = 0, busy;
  layer_cfg_t cfg;
  logic mem_rd_req_valid, mem_rd_req_ready, mem_rd_rsp_valid;
  logic [ADDR_W-1:0] mem_rd_addr;
  logic [VEC*32-1:0] mem_rd_rsp_data;
  logic out_valid, out_ready, ev_pad, ev_wload;
  logic [BW-1:0] out_data;
  logic mem_wr_valid = 0, mem_wr_ready;
  logic [31:0] mem_wr_addr = 0;
  logic [VEC*32-1:0] mem_wr_data = '0;
  int checks = 0, failures = 0, pads = 0, wloads = 0, beats = 0;
  logic [BW-1:0] expq[$];
  bit throttle = 1;
  int first_beat, last_beat, cyc = 0;

  ffcnn_data_in #(.VEC(VEC), .LANE(LANE), .WBUF_DEPTH(WBUF), .MAX_OUTSTANDING(MO)) dut (
    .clk, .rst_n, .start, .cfg, .busy,
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_addr, .mem_rd_rsp_valid, .mem_rd_rsp_data,
    .out_valid, .out_ready, .out_data, .ev_pad, .ev_wload);

  ffcnn_mem_model #(.VEC(VEC), .DEPTH(1024), .LAT(4), .STALL(1)) mem (.*);

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

  always @(negedge clk) out_ready <= throttle ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) begin
    cyc++;
    if (ev_pad) pads++;
    if (ev_wload) wloads++;
    if (rst_n && out_valid && out_ready) begin
      if (beats == 0) first_beat = cyc;
      last_beat = cyc;
      beats++;
      if (expq.size() == 0) check(0, "unexpected beat");
      else begin
        logic [BW-1:0] e;
        e = expq.pop_front();
        check(out_data == e, $sformatf("beat %0d differs (last %0d/%0d, data %h/%h)", beats,
              out_data[BW-1], e[BW-1], out_data[VEC*32-1:0], e[VEC*32-1:0]));
      end
    end
  end

  task automatic run(input int h, input int w, input int cv, input int cvoff, input int cvn,
                     input int k, input int s, input int p, input int groups);
    int ch, cw, kkcv;
    ch = (h + 2 * p - k) / s + 1;
    cw = (w + 2 * p - k) / s + 1;
    kkcv = k * k * cvn;
    cfg = '0;
    cfg.in_h = 12'(h); cfg.in_w = 12'(w); cfg.in_cv = 10'(cv); cfg.in_cv_off = 10'(cvoff);
    cfg.in_cv_n = 10'(cvn); cfg.k = 4'(k); cfg.stride = 3'(s); cfg.pad = 3'(p);
    cfg.conv_h = 12'(ch); cfg.conv_w = 12'(cw); cfg.groups = 10'(groups);
    cfg.base_in = 32'd10; cfg.base_w = 32'd400; cfg.base_b = 32'd900;
    for (int g = 0; g < groups; g++)
      for (int oy = 0; oy < ch; oy++)
        for (int ox = 0; ox < cw; ox++)
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              for (int c = 0; c < cvn; c++) begin
                logic [BW-1:0] b;
                int iy, ix, j;
                iy = oy * s + ky - p;
                ix = ox * s + kx - p;
                j = (ky * k + kx) * cvn + c;
                b = '0;
                b[BW-1] = (ky == k - 1 && kx == k - 1 && c == cvn - 1);
                for (int v = 0; v < LV; v++)
                  b[(LANE*VEC+VEC)*32 + v*VEC*32 +: VEC*32] = mem.mem[900 + g * LV + v];
                for (int l = 0; l < LANE; l++)
                  b[(VEC + l*VEC)*32 +: VEC*32] = mem.mem[400 + (g * LANE + l) * kkcv + j];
                if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                  b[0 +: VEC*32] = mem.mem[10 + (iy * w + ix) * cv + cvoff + c];
                expq.push_back(b);
              end
    beats = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy || expq.size() != 0) @(negedge clk);
    check(beats == groups * ch * cw * kkcv, "beat count");
  endtask

  initial begin
    in_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(5, 6, 3, 1, 2, 3, 2, 1, 2);
    run(3, 3, 2, 0, 2, 1, 1, 0, 1);
    check(pads > 0, "padding beats were produced");
    check(wloads == 3, $sformatf("weight loads %0d want 3", wloads));
    // rate: no stalls anywhere
    throttle = 0;
    mem.stall_en = 0;
    run(4, 4, 2, 0, 2, 2, 1, 0, 1);
    check(last_beat - first_beat + 1 == 3 * 3 * 8,
          $sformatf("%0d cycles for %0d beats", last_beat - first_beat + 1, 3 * 3 * 8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic in_init();
    cfg = '0;
    for (int i = 0; i < 1024; i++)
      for (int v = 0; v < VEC; v++) mem.mem[i][v*32 +: 32] = $urandom;
  endtask
endmodule
