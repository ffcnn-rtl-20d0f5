// ffcnn_lrn: the local response normalization (LRN) kernel.
//
// Each value a_c of a pixel is scaled by a factor that depends on the values
// of the neighbouring channels of the same pixel:
//     b_c = a_c * (k + (alpha/n) * sum_{|j-c| <= (n-1)/2} a_j^2) ^ (-beta)
// (the cross-channel normalization used by AlexNet). k and alpha/n are floats
// and beta an unsigned fixed-point number with 14 fraction bits, all from the
// layer descriptor, as is the window size n (odd, 1 to 7).
// One beat carries the LANE channels of one feature group, so the window only
// spans channels of the same group: a channel within (n-1)/2 of a group edge
// sums fewer neighbours. This is a departure from the textbook LRN, taken so
// that the kernel can work on the stream as it comes.
//
// The power is computed as 2^(-beta * log2(x)): log2 of the mantissa and 2^f
// of the fraction come from 33-entry tables with linear interpolation between
// entries, LOG2TAB[i] = round(log2(1 + i/32) * 2^24) and
// EXP2TAB[i] = round(2^(i/32) * 2^24), i = 0..32. The relative error of the
// factor is below 1e-4 for the usual beta = 0.75.
//
// Pipeline: stage 1 squares, sums and forms x = k + alpha/n * sum; stage 2
// computes x^(-beta) and the product. Output one beat per cycle, two cycles
// after the input; the pipeline holds while the output is not taken. With
// lrn_en low the stream passes through unchanged, with the same latency.
//
// From the paper: an LRN kernel after pooling that normalizes each value by
// a factor depending on its neighbours. The formula, the power approximation
// and the per-group window are this design's choices.
module ffcnn_lrn
  import ffcnn_pkg::*;
#(
  parameter int unsigned LANE = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [LANE*32-1:0]   in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [LANE*32-1:0]   out_data
);
  localparam logic [25:0] LOG2TAB [33] = '{
    26'd0, 26'd744810, 26'd1467383, 26'd2169009, 26'd2850868, 26'd3514044,
    26'd4159533, 26'd4788255, 26'd5401057, 26'd5998727, 26'd6581994, 26'd7151536,
    26'd7707984, 26'd8251926, 26'd8783912, 26'd9304457, 26'd9814042, 26'd10313120,
    26'd10802114, 26'd11281425, 26'd11751428, 26'd12212479, 26'd12664911, 26'd13109041,
    26'd13545168, 26'd13973576, 26'd14394532, 26'd14808293, 26'd15215099, 26'd15615181,
    26'd16008758, 26'd16396036, 26'd16777216
  };
  localparam logic [25:0] EXP2TAB [33] = '{
    26'd16777216, 26'd17144589, 26'd17520007, 26'd17903645, 26'd18295684, 26'd18696307,
    26'd19105703, 26'd19524063, 26'd19951585, 26'd20388467, 26'd20834917, 26'd21291142,
    26'd21757357, 26'd22233781, 26'd22720638, 26'd23218155, 26'd23726566, 26'd24246111,
    26'd24777031, 26'd25319578, 26'd25874004, 26'd26440571, 26'd27019544, 26'd27611195,
    26'd28215802, 26'd28833647, 26'd29465022, 26'd30110222, 26'd30769550, 26'd31443315,
    26'd32131834, 26'd32835430, 26'd33554432
  };

  // x^(-beta) for a positive float x, beta with 14 fraction bits
  function automatic fp32_t fp_pow_neg(input fp32_t x, input logic [15:0] beta);
    logic signed [47:0] lg, y;
    logic signed [63:0] prod;
    logic [5:0]         i;
    logic [25:0]        d, v;
    logic [44:0]        t;
    int                 yi;
    if (x[31] || x[30:23] == 8'd0) return {1'b0, 8'hFF, 23'd0};
    if (x[30:23] == 8'hFF)         return 32'd0;
    // log2(x) with 24 fraction bits
    i  = {1'b0, x[22:18]};
    d  = LOG2TAB[i + 1] - LOG2TAB[i];
    t  = 45'(d) * 45'(x[17:0]);
    lg = ($signed(48'(x[30:23])) - 48'sd127) * 48'sd16777216
       + $signed(48'(LOG2TAB[i])) + $signed(48'(t >> 18));
    // y = -beta * log2(x), 24 fraction bits
    prod = -(64'(lg) * $signed({48'd0, beta}));
    y    = 48'(prod >>> 14);
    // 2^y
    yi = int'(y >>> 24);
    i  = {1'b0, y[23:19]};
    d  = EXP2TAB[i + 1] - EXP2TAB[i];
    t  = 45'(d) * 45'(y[18:0]);
    v  = EXP2TAB[i] + 26'(t >> 19);
    if (yi + 127 >= 255) return {1'b0, 8'hFF, 23'd0};
    if (yi + 127 <= 0)   return 32'd0;
    return {1'b0, 8'(yi + 127), v[23:1]};
  endfunction

  logic en;
  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  fp32_t a  [LANE];
  fp32_t sq [LANE];
  fp32_t xs [LANE];
  for (genvar c = 0; c < LANE; c++) begin : g_sq
    assign a[c]  = in_data[c*32 +: 32];
    assign sq[c] = fp_mul(a[c], a[c]);
  end
  for (genvar c = 0; c < LANE; c++) begin : g_win
    always_comb begin
      fp32_t s;
      s = 32'd0;
      for (int dd = -3; dd <= 3; dd++) begin
        if ((2 * (dd < 0 ? -dd : dd) + 1 <= int'(cfg.lrn_n)) && (c + dd >= 0) && (c + dd < LANE))
          s = fp_add(s, sq[c + dd]);
      end
      xs[c] = fp_add(cfg.lrn_k, fp_mul(cfg.lrn_alpha_n, s));
    end
  end

  logic  v1;
  fp32_t a1 [LANE];
  fp32_t x1 [LANE];
  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else if (en) v1 <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      for (int c = 0; c < LANE; c++) begin
        a1[c] <= a[c];
        x1[c] <= xs[c];
      end
    end
  end

  fp32_t res [LANE];
  for (genvar c = 0; c < LANE; c++) begin : g_pow
    assign res[c] = cfg.lrn_en ? fp_mul(a1[c], fp_pow_neg(x1[c], cfg.lrn_beta)) : a1[c];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= v1;
      for (int c = 0; c < LANE; c++) out_data[c*32 +: 32] <= res[c];
    end
  end

endmodule
