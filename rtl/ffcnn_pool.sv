// ffcnn_pool: the pooling kernel, streaming max pooling on LANE channels.
//
// Input: the convolution results of one layer, one pixel (LANE floats) per
// beat, in raster order (rows of conv_w pixels, conv_h rows) for each group of
// LANE output features in turn. For each pixel the kernel takes the maximum
// down the column of the window from two line buffers (the previous two rows
// at that column), then the maximum along the row from two shift registers
// (the previous two column maxima), which gives the maximum of the P x P
// window whose bottom-right corner is the current pixel. That value is sent
// when the window lies on the pooling grid, i.e. its top-left corner is a
// multiple of the stride S in both directions. P is 2 or 3; any stride from
// 1 up is accepted. Windows never run past the right or bottom edge
// (pool_w = (conv_w - P)/S + 1, pool_h likewise).
// With pool_en low the stream passes through unchanged (layers without
// pooling).
//
// Interface and timing: start (one cycle, cfg held for the layer) clears the
// position counters. One beat per cycle in; an output beat appears one cycle
// after the beat that completes its window and is held until taken, stalling
// the input. Lane 0 is in the least significant 32 bits.
//
// From the paper: max pooling over a local neighbourhood as a kernel in the
// pipeline after the convolution. The line-buffer structure and W_MAX = 128
// (room for a 112-pixel-wide row) are this design's choices.
module ffcnn_pool
  import ffcnn_pkg::*;
#(
  parameter int unsigned LANE  = 16,
  parameter int unsigned W_MAX = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [LANE*32-1:0]   in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [LANE*32-1:0]   out_data
);
  localparam int unsigned XW = $clog2(W_MAX);

  logic en, acc;
  assign en       = !out_valid || out_ready;
  assign in_ready = en;
  assign acc      = in_valid && en;

  logic [LANE*32-1:0] lb0 [W_MAX];   // row y-1
  logic [LANE*32-1:0] lb1 [W_MAX];   // row y-2
  logic [LANE*32-1:0] h1, h2;        // column maxima at x-1, x-2
  logic [11:0]        x, y;
  logic [2:0]         xph, yph;      // position on the stride grid
  logic [11:0]        pm1;           // P - 1

  logic [LANE*32-1:0] col, win;
  logic               emit;

  assign pm1 = (cfg.pool_size == 2'd3) ? 12'd2 : 12'd1;

  always_comb begin
    for (int l = 0; l < LANE; l++) begin
      col[l*32 +: 32] = fp_max(in_data[l*32 +: 32], lb0[XW'(x)][l*32 +: 32]);
      if (cfg.pool_size == 2'd3)
        col[l*32 +: 32] = fp_max(col[l*32 +: 32], lb1[XW'(x)][l*32 +: 32]);
      win[l*32 +: 32] = fp_max(col[l*32 +: 32], h1[l*32 +: 32]);
      if (cfg.pool_size == 2'd3)
        win[l*32 +: 32] = fp_max(win[l*32 +: 32], h2[l*32 +: 32]);
    end
    emit = (x >= pm1) && (y >= pm1) && (xph == 3'd0) && (yph == 3'd0);
  end

  always_ff @(posedge clk) begin
    if (acc) begin
      lb1[XW'(x)] <= lb0[XW'(x)];
      lb0[XW'(x)] <= in_data;
      h2 <= h1;
      h1 <= col;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      x <= '0; y <= '0; xph <= '0; yph <= '0;
    end else if (acc && cfg.pool_en) begin
      if (x == cfg.conv_w - 1'b1) begin
        x   <= '0;
        xph <= '0;
        if (y == cfg.conv_h - 1'b1) begin
          y   <= '0;
          yph <= '0;
        end else begin
          y   <= y + 1'b1;
          yph <= (y + 1'b1 == pm1) ? 3'd0 : (yph == cfg.pool_stride - 1'b1) ? 3'd0 : yph + 1'b1;
        end
      end else begin
        x   <= x + 1'b1;
        xph <= (x + 1'b1 == pm1) ? 3'd0 : (xph == cfg.pool_stride - 1'b1) ? 3'd0 : xph + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= in_valid && (!cfg.pool_en || emit);
      if (in_valid) out_data <= cfg.pool_en ? win : in_data;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) acc && cfg.pool_en |-> cfg.conv_w <= 12'(W_MAX))
    else $error("ffcnn_pool: row wider than the line buffer");

endmodule
