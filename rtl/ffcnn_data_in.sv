// ffcnn_data_in: the DataIN kernel. Reads a layer's weights, biases and input
// features from global memory and feeds the convolution kernel.
//
// How it works. The output features of a layer are processed in groups of
// LANE. For each group the kernel first reads the LANE biases (LANE/VEC
// vectors) and the weights of the LANE features (LANE * KKCV vectors, where
// KKCV = k*k*in_cv_n) into an on-chip weight buffer; the weights are then
// reused for every output pixel of the group. It then walks the output pixels
// (oy, ox) in raster order and, for each, the flattened window index
// (ky, kx, cv) with channel vectors innermost, issuing one vector read per
// step. Each returned data vector leaves as one beat towards the convolution
// kernel, together with the LANE weight vectors of the same window index, the
// LANE biases of the group and a flag marking the last beat of the pixel.
// Window positions outside the input (zero padding) are still read, from the
// layer's first input vector, and their data are replaced by zeros, so all
// responses stay in request order with a single tag FIFO.
//
// Memory layout (this design's choice): feature maps are pixel-major with
// channels innermost, in_cv vectors of VEC floats per pixel; a layer uses
// in_cv_n of them from in_cv_off on (channel groups). The weights of output
// feature f are KKCV consecutive vectors at base_w + f*KKCV, in the same
// (ky, kx, cv) order; the biases are consecutive floats at base_b.
//
// Interface and timing. start (one cycle, with cfg valid and held) begins a
// layer; busy stays high until the last response has entered the output
// channel. Memory reads: mem_rd_req_valid/ready/addr, responses return in
// order on mem_rd_rsp_valid/data after any latency, with no backpressure.
// At most MAX_OUTSTANDING requests are in flight, and a request is only
// issued when the output channel is sure to have room for its beat, so the
// kernel issues one read per cycle while the convolution keeps up.
// Beat format on out_data, MSB first: {last, bias[LANE], weights[LANE][VEC],
// data[VEC]}, lane 0 / element 0 in the least significant position of each
// field.
//
// From the paper: a DataIN kernel that moves features and weights from
// global memory into the pipeline, and data reuse. The weight buffer,
// the address order, padding and groups are this design's own.
module ffcnn_data_in
  import ffcnn_pkg::*;
#(
  parameter int unsigned VEC             = 16,
  parameter int unsigned LANE            = 16,
  parameter int unsigned WBUF_DEPTH      = 576,
  parameter int unsigned MAX_OUTSTANDING = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               cfg,
  output logic                     busy,
  // global memory read port
  output logic                     mem_rd_req_valid,
  input  logic                     mem_rd_req_ready,
  output logic [ADDR_W-1:0]        mem_rd_addr,
  input  logic                     mem_rd_rsp_valid,
  input  logic [VEC*32-1:0]        mem_rd_rsp_data,
  // channel to the convolution kernel
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [1+(LANE+LANE*VEC+VEC)*32-1:0] out_data,
  // event counters for observation
  output logic                     ev_pad,      // a padding beat was issued
  output logic                     ev_wload     // a weight-buffer load began
);
  localparam int unsigned LV    = LANE / VEC;
  localparam int unsigned BEAT_W = 1 + (LANE + LANE * VEC + VEC) * 32;
  localparam int unsigned JW    = $clog2(WBUF_DEPTH);
  localparam int unsigned LW    = (LANE > 1) ? $clog2(LANE) : 1;
  localparam int unsigned OW    = $clog2(MAX_OUTSTANDING + 1);

  typedef enum logic [1:0] {K_BIAS, K_WEIGHT, K_DATA} kind_t;
  typedef struct packed {
    kind_t         kind;
    logic          pad;
    logic          last;
    logic [LW-1:0] lane;
    logic [JW-1:0] j;
  } tag_t;

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_WEIGHT, S_DATA, S_NEXT, S_DRAIN} state_t;

  state_t state;

  // layer constants
  logic [15:0] kkcv;
  logic [9:0]  grp;
  logic [ADDR_W-1:0] b_ptr, w_ptr;

  // loop counters
  logic [LW-1:0] l_cnt;
  logic [JW-1:0] j_cnt;
  logic [11:0]   oy, ox;
  logic [3:0]    ky, kx;
  logic [9:0]    cv;

  // storage
  logic [VEC*32-1:0] wbuf [LANE][WBUF_DEPTH];
  logic [LANE*32-1:0] bias_q;

  // tag FIFO and output channel
  logic          tag_push, tag_pop, tag_valid, tag_ready;
  tag_t          tag_in, tag_out;
  logic [OW-1:0] tag_cnt, oq_cnt;
  logic          oq_in_valid, oq_in_ready;
  logic [BEAT_W-1:0] beat;

  ffcnn_channel #(.WIDTH($bits(tag_t)), .DEPTH(MAX_OUTSTANDING)) u_tags (
    .clk, .rst_n,
    .in_valid(tag_push), .in_ready(tag_ready), .in_data(tag_in),
    .out_valid(tag_valid), .out_ready(tag_pop), .out_data(tag_out),
    .count(tag_cnt)
  );

  ffcnn_channel #(.WIDTH(BEAT_W), .DEPTH(MAX_OUTSTANDING)) u_out (
    .clk, .rst_n,
    .in_valid(oq_in_valid), .in_ready(oq_in_ready), .in_data(beat),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .count(oq_cnt)
  );

  // ---------------------------------------------------------------------
  // request side
  // ---------------------------------------------------------------------
  logic        credit;
  logic        issuing;
  logic signed [15:0] iy, ix;
  logic        in_bounds;
  logic        last_win;

  assign credit  = (OW+1)'(tag_cnt) + (OW+1)'(oq_cnt) < (OW+1)'(MAX_OUTSTANDING);
  assign issuing = mem_rd_req_valid && mem_rd_req_ready;

  always_comb begin
    iy = $signed({4'd0, oy}) * $signed({13'd0, cfg.stride}) + $signed({12'd0, ky}) - $signed({13'd0, cfg.pad});
    ix = $signed({4'd0, ox}) * $signed({13'd0, cfg.stride}) + $signed({12'd0, kx}) - $signed({13'd0, cfg.pad});
    in_bounds = (iy >= 0) && (ix >= 0) && (iy < $signed({4'd0, cfg.in_h})) && (ix < $signed({4'd0, cfg.in_w}));
    last_win  = (ky == cfg.k - 1'b1) && (kx == cfg.k - 1'b1) && (cv == cfg.in_cv_n - 1'b1);
  end

  always_comb begin
    mem_rd_req_valid = 1'b0;
    mem_rd_addr      = '0;
    tag_in           = '0;
    unique case (state)
      S_BIAS: begin
        mem_rd_req_valid = credit;
        mem_rd_addr      = b_ptr;
        tag_in.kind      = K_BIAS;
        tag_in.j         = j_cnt;
      end
      S_WEIGHT: begin
        mem_rd_req_valid = credit;
        mem_rd_addr      = w_ptr;
        tag_in.kind      = K_WEIGHT;
        tag_in.lane      = l_cnt;
        tag_in.j         = j_cnt;
      end
      S_DATA: begin
        mem_rd_req_valid = credit;
        mem_rd_addr      = in_bounds
          ? cfg.base_in + ADDR_W'((32'(iy[11:0]) * cfg.in_w + 32'(ix[11:0])) * cfg.in_cv)
                        + ADDR_W'(cfg.in_cv_off) + ADDR_W'(cv)
          : cfg.base_in;
        tag_in.kind      = K_DATA;
        tag_in.pad       = !in_bounds;
        tag_in.last      = last_win;
        tag_in.j         = JW'(((32'(ky) * cfg.k + 32'(kx)) * cfg.in_cv_n) + 32'(cv));
      end
      default: ;
    endcase
  end
  assign tag_push = issuing;
  assign ev_pad   = issuing && (state == S_DATA) && !in_bounds;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kkcv   <= '0;
      grp    <= '0;
      b_ptr  <= '0;
      w_ptr  <= '0;
      l_cnt  <= '0;
      j_cnt  <= '0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; cv <= '0;
      ev_wload <= 1'b0;
    end else begin
      ev_wload <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          kkcv  <= 16'(cfg.k) * 16'(cfg.k) * 16'(cfg.in_cv_n);
          grp   <= '0;
          b_ptr <= cfg.base_b;
          w_ptr <= cfg.base_w;
          j_cnt <= '0;
          state <= S_BIAS;
        end
        S_BIAS: if (issuing) begin
          b_ptr <= b_ptr + 1'b1;
          if (j_cnt == JW'(LV - 1)) begin
            j_cnt    <= '0;
            l_cnt    <= '0;
            ev_wload <= 1'b1;
            state    <= S_WEIGHT;
          end else begin
            j_cnt <= j_cnt + 1'b1;
          end
        end
        S_WEIGHT: if (issuing) begin
          w_ptr <= w_ptr + 1'b1;
          if (16'(j_cnt) == kkcv - 1'b1) begin
            j_cnt <= '0;
            if (l_cnt == LW'(LANE - 1)) begin
              oy <= '0; ox <= '0; ky <= '0; kx <= '0; cv <= '0;
              state <= S_DATA;
            end else begin
              l_cnt <= l_cnt + 1'b1;
            end
          end else begin
            j_cnt <= j_cnt + 1'b1;
          end
        end
        S_DATA: if (issuing) begin
          if (cv != cfg.in_cv_n - 1'b1) cv <= cv + 1'b1;
          else begin
            cv <= '0;
            if (kx != cfg.k - 1'b1) kx <= kx + 1'b1;
            else begin
              kx <= '0;
              if (ky != cfg.k - 1'b1) ky <= ky + 1'b1;
              else begin
                ky <= '0;
                if (ox != cfg.conv_w - 1'b1) ox <= ox + 1'b1;
                else begin
                  ox <= '0;
                  if (oy != cfg.conv_h - 1'b1) oy <= oy + 1'b1;
                  else state <= S_NEXT;
                end
              end
            end
          end
        end
        S_NEXT: begin
          j_cnt <= '0;
          if (grp == cfg.groups - 1'b1) state <= S_DRAIN;
          else begin
            grp   <= grp + 1'b1;
            state <= S_BIAS;
          end
        end
        S_DRAIN: if (tag_cnt == '0 && !mem_rd_rsp_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------------
  // response side
  // ---------------------------------------------------------------------
  assign tag_pop = mem_rd_rsp_valid;

  always_ff @(posedge clk) begin
    if (mem_rd_rsp_valid && tag_out.kind == K_WEIGHT)
      wbuf[tag_out.lane][tag_out.j] <= mem_rd_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bias_q <= '0;
    end else if (mem_rd_rsp_valid && tag_out.kind == K_BIAS) begin
      for (int v = 0; v < LV; v++)
        if (tag_out.j == JW'(v)) bias_q[v*VEC*32 +: VEC*32] <= mem_rd_rsp_data;
    end
  end

  always_comb begin
    beat = '0;
    beat[BEAT_W-1] = tag_out.last;
    beat[(LANE*VEC+VEC)*32 +: LANE*32] = bias_q;
    for (int l = 0; l < LANE; l++)
      beat[(VEC + l*VEC)*32 +: VEC*32] = wbuf[l][tag_out.j];
    beat[0 +: VEC*32] = tag_out.pad ? '0 : mem_rd_rsp_data;
  end
  assign oq_in_valid = mem_rd_rsp_valid && tag_out.kind == K_DATA;

  // rules of the memory port and of the layer shape
  assert property (@(posedge clk) disable iff (!rst_n) mem_rd_rsp_valid |-> tag_valid)
    else $error("ffcnn_data_in: read response without a pending request");
  assert property (@(posedge clk) disable iff (!rst_n) tag_push |-> tag_ready)
    else $error("ffcnn_data_in: tag FIFO overflow");
  assert property (@(posedge clk) disable iff (!rst_n) oq_in_valid |-> oq_in_ready)
    else $error("ffcnn_data_in: output channel overflow");
  assert property (@(posedge clk) disable iff (!rst_n) start |-> (32'(cfg.k) * cfg.k * cfg.in_cv_n) <= WBUF_DEPTH)
    else $error("ffcnn_data_in: layer window does not fit the weight buffer");

  initial begin
    assert (LANE % VEC == 0) else $fatal(1, "ffcnn_data_in: LANE must be a multiple of VEC");
  end

endmodule
