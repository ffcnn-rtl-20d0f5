// ffcnn_channel: the channel (pipe) that joins two kernels of the accelerator.
//
// A synchronous first-in first-out buffer of DEPTH entries of WIDTH bits with a
// valid/ready handshake on both sides: a word moves when valid and ready are
// both high on a rising clock edge. in_ready is high while the buffer is not
// full, out_valid while it is not empty; out_data is the head entry, read
// straight from the storage array (no extra latency), so a word written in one
// cycle can be taken in the next. Writing and reading in the same cycle is
// allowed when full. count gives the occupancy.
//
// The paper joins its kernels with OpenCL channels/pipes and gives neither
// their depth nor their protocol; the FIFO form and the handshake are this
// design's choice.
module ffcnn_channel #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count < CW'(DEPTH)) || out_ready;
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // a producer keeps its word stable until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid && !in_ready |=> in_valid && $stable(in_data))
    else $error("ffcnn_channel: producer dropped or changed a word before it was taken");

endmodule
