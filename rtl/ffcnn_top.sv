// ffcnn_top: the FFCNN accelerator, a chain of kernels joined by channels.
//
//   global memory --> DataIN --> Convolution --> pooling --> LRN --> DataOut --> global memory
//                                     ^
//                           layer configuration
//
// The host writes one descriptor per layer (cfg_we/cfg_addr/cfg_wdata) and
// pulses start with num_layers. The layer configuration block then starts
// all kernels on each layer in turn and moves on when DataOut has written
// the layer's last result; done pulses after the last layer. Within a layer
// the convolution, pooling and LRN results never leave the chip: they flow
// from kernel to kernel through FIFO channels with valid/ready handshakes.
// Between layers the results go to global memory and are read back by
// DataIN for the next layer.
//
// Global memory (off-chip DRAM behind a DDR controller) is outside this
// module: it sees a read port of VEC-float vectors (requests with a
// valid/ready handshake, in-order responses of any latency, no backpressure)
// and a write port of VEC-float vectors (valid/ready). Addresses count
// vectors.
//
// The chain of kernels and the layer configuration follow the paper's
// architecture figure; channel depths, the port protocols and the sizes
// (VEC = LANE = 16, a 576-vector weight buffer per lane, 128-pixel line
// buffers, 64 layer descriptors) are this design's choices.
module ffcnn_top
  import ffcnn_pkg::*;
#(
  parameter int unsigned VEC             = 16,
  parameter int unsigned LANE            = 16,
  parameter int unsigned WBUF_DEPTH      = 576,
  parameter int unsigned W_MAX           = 128,
  parameter int unsigned MAX_LAYERS      = 64,
  parameter int unsigned MAX_OUTSTANDING = 8,
  parameter int unsigned CHAN_DEPTH      = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // host side
  input  logic                            cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]   cfg_addr,
  input  layer_cfg_t                      cfg_wdata,
  input  logic                            start,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] num_layers,
  output logic                            busy,
  output logic                            done,
  // global memory read port
  output logic                            mem_rd_req_valid,
  input  logic                            mem_rd_req_ready,
  output logic [ADDR_W-1:0]               mem_rd_addr,
  input  logic                            mem_rd_rsp_valid,
  input  logic [VEC*32-1:0]               mem_rd_rsp_data,
  // global memory write port
  output logic                            mem_wr_valid,
  input  logic                            mem_wr_ready,
  output logic [ADDR_W-1:0]               mem_wr_addr,
  output logic [VEC*32-1:0]               mem_wr_data
);
  localparam int unsigned BEAT_W = 1 + (LANE + LANE * VEC + VEC) * 32;
  localparam int unsigned PIX_W  = LANE * 32;
  localparam int unsigned CW     = $clog2(CHAN_DEPTH + 1);

  layer_cfg_t cfg;
  logic       layer_start, layer_done, din_busy;
  logic       ev_pad, ev_wload;
  logic [$clog2(MAX_LAYERS)-1:0] layer_idx;

  ffcnn_layer_config #(.MAX_LAYERS(MAX_LAYERS)) u_cfg (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .start, .num_layers,
    .layer_start, .layer_cfg(cfg), .layer_idx, .layer_done, .busy, .done
  );

  // DataIN -> Convolution (the channel sits inside DataIN)
  logic              d2c_valid, d2c_ready;
  logic [BEAT_W-1:0] d2c_data;

  ffcnn_data_in #(.VEC(VEC), .LANE(LANE), .WBUF_DEPTH(WBUF_DEPTH),
                  .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_data_in (
    .clk, .rst_n, .start(layer_start), .cfg, .busy(din_busy),
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_addr,
    .mem_rd_rsp_valid, .mem_rd_rsp_data,
    .out_valid(d2c_valid), .out_ready(d2c_ready), .out_data(d2c_data),
    .ev_pad, .ev_wload
  );

  // Convolution -> channel -> pooling
  logic             c_valid, c_ready, p_in_valid, p_in_ready;
  logic [PIX_W-1:0] c_data, p_in_data;
  logic [CW-1:0]    c2p_count, p2l_count, l2o_count;

  ffcnn_conv #(.VEC(VEC), .LANE(LANE)) u_conv (
    .clk, .rst_n, .relu_en(cfg.relu_en),
    .in_valid(d2c_valid), .in_ready(d2c_ready), .in_data(d2c_data),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data)
  );

  ffcnn_channel #(.WIDTH(PIX_W), .DEPTH(CHAN_DEPTH)) u_c2p (
    .clk, .rst_n,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid(p_in_valid), .out_ready(p_in_ready), .out_data(p_in_data),
    .count(c2p_count)
  );

  // pooling -> channel -> LRN
  logic             p_valid, p_ready, l_in_valid, l_in_ready;
  logic [PIX_W-1:0] p_data, l_in_data;

  ffcnn_pool #(.LANE(LANE), .W_MAX(W_MAX)) u_pool (
    .clk, .rst_n, .start(layer_start), .cfg,
    .in_valid(p_in_valid), .in_ready(p_in_ready), .in_data(p_in_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data)
  );

  ffcnn_channel #(.WIDTH(PIX_W), .DEPTH(CHAN_DEPTH)) u_p2l (
    .clk, .rst_n,
    .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data),
    .out_valid(l_in_valid), .out_ready(l_in_ready), .out_data(l_in_data),
    .count(p2l_count)
  );

  // LRN -> channel -> DataOut
  logic             l_valid, l_ready, o_in_valid, o_in_ready;
  logic [PIX_W-1:0] l_data, o_in_data;

  ffcnn_lrn #(.LANE(LANE)) u_lrn (
    .clk, .rst_n, .cfg,
    .in_valid(l_in_valid), .in_ready(l_in_ready), .in_data(l_in_data),
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data)
  );

  ffcnn_channel #(.WIDTH(PIX_W), .DEPTH(CHAN_DEPTH)) u_l2o (
    .clk, .rst_n,
    .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data),
    .out_valid(o_in_valid), .out_ready(o_in_ready), .out_data(o_in_data),
    .count(l2o_count)
  );

  ffcnn_data_out #(.VEC(VEC), .LANE(LANE)) u_data_out (
    .clk, .rst_n, .start(layer_start), .cfg,
    .in_valid(o_in_valid), .in_ready(o_in_ready), .in_data(o_in_data),
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .layer_done
  );

endmodule
