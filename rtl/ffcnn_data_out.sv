// ffcnn_data_out: the DataOut kernel. Writes the results of a layer back to
// global memory.
//
// Each input beat holds the LANE results of one output pixel for one group
// of LANE output features; the beats arrive in raster order over the output
// map (pool_h x pool_w when the layer pools, conv_h x conv_w otherwise), one
// group after the other. The kernel writes each beat as LANE/VEC vector writes
// into the channel-innermost layout that the DataIN kernel reads:
//     addr = base_out + (py*W + px)*out_cv + out_cv_off + g*LANE/VEC + v
// so the next layer can read the result directly (out_cv_off places a channel
// group of a split layer).
//
// Interface and timing: start (one cycle, cfg held) clears the counters. A
// write is offered as soon as a beat is present and moves when mem_wr_ready
// is high; a beat is released after its last vector. layer_done pulses for
// one cycle in the cycle after the last write of the layer was accepted.
//
// From the paper: a DataOut kernel that moves results to global memory. The
// layout and the address arithmetic are this design's choices.
module ffcnn_data_out
  import ffcnn_pkg::*;
#(
  parameter int unsigned VEC  = 16,
  parameter int unsigned LANE = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [LANE*32-1:0]   in_data,
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output logic [ADDR_W-1:0]    mem_wr_addr,
  output logic [VEC*32-1:0]    mem_wr_data,
  output logic                 layer_done
);
  localparam int unsigned LV = LANE / VEC;
  localparam int unsigned VW = (LV > 1) ? $clog2(LV) : 1;

  logic [11:0] px, py, oh, ow;
  logic [9:0]  g;
  logic [VW-1:0] v;
  logic        wr, last_v, last_all;

  assign oh = cfg.pool_en ? cfg.pool_h : cfg.conv_h;
  assign ow = cfg.pool_en ? cfg.pool_w : cfg.conv_w;

  assign last_v   = (v == VW'(LV - 1));
  assign last_all = last_v && (px == ow - 1'b1) && (py == oh - 1'b1) && (g == cfg.groups - 1'b1);

  assign mem_wr_valid = in_valid;
  assign mem_wr_addr  = cfg.base_out
                      + ADDR_W'((32'(py) * ow + 32'(px)) * cfg.out_cv)
                      + ADDR_W'(cfg.out_cv_off) + ADDR_W'(32'(g) * LV) + ADDR_W'(v);
  assign mem_wr_data  = in_data[32'(v) * VEC * 32 +: VEC * 32];
  assign wr           = mem_wr_valid && mem_wr_ready;
  assign in_ready     = mem_wr_ready && last_v;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      px <= '0; py <= '0; g <= '0; v <= '0;
      layer_done <= 1'b0;
    end else begin
      layer_done <= wr && last_all;
      if (wr) begin
        if (!last_v) v <= v + 1'b1;
        else begin
          v <= '0;
          if (px != ow - 1'b1) px <= px + 1'b1;
          else begin
            px <= '0;
            if (py != oh - 1'b1) py <= py + 1'b1;
            else begin
              py <= '0;
              g  <= (g == cfg.groups - 1'b1) ? '0 : g + 1'b1;
            end
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr_addr) && $stable(mem_wr_data))
    else $error("ffcnn_data_out: write request changed before it was accepted");

endmodule
