// ffcnn_layer_config: layer configuration table and layer sequencer.
//
// The host writes one layer descriptor (ffcnn_pkg::layer_cfg_t) per network
// layer into a table of MAX_LAYERS entries through cfg_we/cfg_addr/cfg_wdata,
// then pulses start with num_layers set. The sequencer then runs the layers
// in order without further host help: for each layer it presents the
// descriptor on layer_cfg (held for the whole layer), pulses layer_start for
// one cycle so that every kernel starts, and waits for layer_done from the
// DataOut kernel. After the last layer it pulses done for one cycle.
// busy is high from the cycle after start until done. The descriptor is
// registered, so layer_start is high in the second cycle after start, and in
// the second cycle after the previous layer's layer_done. Writes to the table while busy are allowed but
// change a layer only if it has not been started yet.
//
// The paper shows a "Layer Configuration" box feeding the convolution kernel
// and states that the forward pass needs very little host involvement; what
// the box holds and how layers are sequenced is this design's choice.
module ffcnn_layer_config
  import ffcnn_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 64
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0]   cfg_addr,
  input  layer_cfg_t                      cfg_wdata,
  input  logic                            start,
  input  logic [$clog2(MAX_LAYERS+1)-1:0] num_layers,
  output logic                            layer_start,
  output layer_cfg_t                      layer_cfg,
  output logic [$clog2(MAX_LAYERS)-1:0]   layer_idx,
  input  logic                            layer_done,
  output logic                            busy,
  output logic                            done
);
  localparam int unsigned NW = $clog2(MAX_LAYERS + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_t;

  layer_cfg_t table_q [MAX_LAYERS];
  state_t     state;
  logic [NW-1:0] n_q;

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= cfg_wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer_idx   <= '0;
      layer_start <= 1'b0;
      done        <= 1'b0;
      n_q         <= '0;
      layer_cfg   <= '0;
    end else begin
      layer_start <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (num_layers == '0) begin
            done <= 1'b1;
          end else begin
            n_q       <= num_layers;
            layer_idx <= '0;
            state     <= S_LOAD;
          end
        end
        S_LOAD: begin
          layer_cfg   <= table_q[layer_idx];
          layer_start <= 1'b1;
          state       <= S_RUN;
        end
        S_RUN: if (layer_done) begin
          if (NW'(layer_idx) + 1'b1 == n_q) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            layer_idx <= layer_idx + 1'b1;
            state     <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) num_layers <= NW'(MAX_LAYERS) || !start)
    else $error("ffcnn_layer_config: more layers requested than the table holds");

endmodule
