// ffcnn_conv: the Convolution kernel, a floating-point multiply and adder-tree
// pipeline computing LANE output features of one output pixel at a time.
//
// The 3-D convolution of a layer is flattened into a 1-D dot product of
// length C*K*K per output feature (one input window against one weight
// vector), so the kernel only needs two nested loops: output pixels, and
// beats of VEC window values. Each input beat carries VEC input values, the
// matching VEC weights of each of the LANE output features, the LANE biases
// and a flag marking the last beat of the pixel.
//
// Pipeline (all 32-bit IEEE floats, see ffcnn_pkg):
//   stage 1: LANE*VEC multipliers, registered;
//   stage 2: one VEC-input adder tree per lane, registered;
//   stage 3: per-lane accumulator that adds the tree sum of every beat; on
//            the last beat of a pixel it adds the bias, applies ReLU when
//            relu_en is set, and places the LANE results in the output
//            register, clearing the accumulator for the next pixel.
// A pixel of n beats therefore leaves 3 cycles after its last beat enters,
// and the kernel accepts one beat per cycle. When the output register is
// full and not taken, the whole pipeline holds (in_ready low).
// Output word: LANE floats, lane 0 in the least significant 32 bits.
//
// From the paper: the flattened 1-D dot product, the multiplier-adder tree
// with an accumulation buffer, and 32-bit floating point. The bias follows
// the paper's general convolution equation; the optional ReLU at the output,
// the stage split and VEC = LANE = 16 are this design's choices.
module ffcnn_conv
  import ffcnn_pkg::*;
#(
  parameter int unsigned VEC  = 16,
  parameter int unsigned LANE = 16
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  relu_en,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic [1+(LANE+LANE*VEC+VEC)*32-1:0]   in_data,
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output logic [LANE*32-1:0]                    out_data
);
  localparam int unsigned LEVELS = $clog2(VEC);
  localparam int unsigned TW     = 1 << LEVELS;   // tree width, VEC rounded up

  logic en;
  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  // input fields
  logic               in_last;
  fp32_t              in_bias [LANE];
  fp32_t              in_w    [LANE][VEC];
  fp32_t              in_d    [VEC];
  always_comb begin
    in_last = in_data[1+(LANE+LANE*VEC+VEC)*32-1];
    for (int l = 0; l < LANE; l++) begin
      in_bias[l] = in_data[(LANE*VEC+VEC+l)*32 +: 32];
      for (int v = 0; v < VEC; v++)
        in_w[l][v] = in_data[(VEC+l*VEC+v)*32 +: 32];
    end
    for (int v = 0; v < VEC; v++) in_d[v] = in_data[v*32 +: 32];
  end

  // stage 1: products
  logic  v1, last1;
  fp32_t bias1 [LANE];
  fp32_t prod1 [LANE][VEC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1    <= 1'b0;
      last1 <= 1'b0;
    end else if (en) begin
      v1    <= in_valid;
      last1 <= in_last;
    end
  end
  for (genvar l = 0; l < LANE; l++) begin : g_mul_lane
    always_ff @(posedge clk) begin
      if (en) bias1[l] <= in_bias[l];
    end
    for (genvar v = 0; v < VEC; v++) begin : g_mul
      always_ff @(posedge clk) begin
        if (en) prod1[l][v] <= fp_mul(in_w[l][v], in_d[v]);
      end
    end
  end

  // stage 2: adder trees
  logic  v2, last2;
  fp32_t bias2 [LANE];
  fp32_t sum2  [LANE];
  fp32_t tree_sum [LANE];
  // one array of partial sums per tree level: level 0 holds the products,
  // level LEVELS the sum of the lane
  for (genvar l = 0; l < LANE; l++) begin : g_tree_lane
    for (genvar s = 0; s <= LEVELS; s++) begin : g_lvl
      fp32_t n [TW >> s];
      for (genvar i = 0; i < (TW >> s); i++) begin : g_node
        if (s == 0) begin : g_leaf
          assign n[i] = (i < VEC) ? prod1[l][i] : 32'd0;
        end else begin : g_add
          assign n[i] = fp_add(g_lvl[s-1].n[2*i], g_lvl[s-1].n[2*i+1]);
        end
      end
    end
    assign tree_sum[l] = g_lvl[LEVELS].n[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2    <= 1'b0;
      last2 <= 1'b0;
    end else if (en) begin
      v2    <= v1;
      last2 <= last1;
    end
  end
  always_ff @(posedge clk) begin
    if (en) begin
      for (int l = 0; l < LANE; l++) begin
        bias2[l] <= bias1[l];
        sum2[l]  <= tree_sum[l];
      end
    end
  end

  // stage 3: accumulation, bias and ReLU
  fp32_t acc   [LANE];
  fp32_t total [LANE];
  fp32_t res   [LANE];
  for (genvar l = 0; l < LANE; l++) begin : g_acc
    fp32_t biased;
    assign total[l] = fp_add(acc[l], sum2[l]);
    assign biased   = fp_add(total[l], bias2[l]);
    assign res[l]   = relu_en ? fp_relu(biased) : biased;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANE; l++) acc[l] <= '0;
    end else if (en) begin
      out_valid <= v2 && last2;
      if (v2) begin
        for (int l = 0; l < LANE; l++) acc[l] <= last2 ? 32'd0 : total[l];
      end
    end
  end
  always_ff @(posedge clk) begin
    if (en && v2 && last2) begin
      for (int l = 0; l < LANE; l++) out_data[l*32 +: 32] <= res[l];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("ffcnn_conv: output dropped while held");

endmodule
