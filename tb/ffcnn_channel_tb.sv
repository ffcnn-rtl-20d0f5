// ffcnn_channel_tb: self-checking test of the channel FIFO.
//
// Random pushes and pops (both sides throttled at random) are compared word
// by word with a queue model; the occupancy count, full and empty flags and
// the one-cycle write-to-read latency are checked as well.
module ffcnn_channel_tb;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  ffcnn_channel #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // latency: word written in one cycle is readable in the next
    in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 16'hBEEF, "one-cycle latency");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    check(!out_valid, "empty again");
    // fill to full
    for (int i = 0; i < D; i++) begin
      in_valid = 1; in_data = W'(i + 100);
      @(negedge clk);
    end
    in_valid = 0;
    check(count == D && !in_ready, "full after DEPTH writes");
    for (int i = 0; i < D; i++) begin
      check(out_data == W'(i + 100), "order after fill");
      out_ready = 1;
      @(negedge clk);
    end
    out_ready = 0;
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] d;
      bit push, pop;
      if (!(in_valid && !in_ready)) begin   // a refused word is held
        in_valid = ($urandom_range(0, 3) != 0);
        in_data  = W'($urandom);
      end
      d = in_data;
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      push = in_valid && in_ready;
      pop  = out_valid && out_ready;
      check(out_valid == (model.size() != 0), "valid matches model");
      check(int'(count) == model.size(), "count matches model");
      if (pop) check(out_data == model[0], "data matches model");
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(d);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
