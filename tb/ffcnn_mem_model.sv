// ffcnn_mem_model: behavioural model of the accelerator's global memory (the
// off-chip DRAM behind its DDR controller), for simulation only.
//
// DEPTH vectors of VEC floats. Read requests are accepted when
// mem_rd_req_ready is high (at random when STALL is set, always otherwise);
// each read returns its data LAT cycles later, in order, on
// mem_rd_rsp_valid/mem_rd_rsp_data. Writes are accepted when mem_wr_ready is
// high (at random when STALL is set, never while wr_hold is set) and take
// effect at once. The array mem
// is reached by hierarchical reference from the testbench to load inputs
// and read results. Out-of-range addresses read zero and are counted in
// bad_addr.
module ffcnn_mem_model #(
  parameter int unsigned VEC   = 16,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LAT   = 5,
  parameter bit          STALL = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_rd_req_valid,
  output logic              mem_rd_req_ready,
  input  logic [31:0]       mem_rd_addr,
  output logic              mem_rd_rsp_valid,
  output logic [VEC*32-1:0] mem_rd_rsp_data,
  input  logic              mem_wr_valid,
  output logic              mem_wr_ready,
  input  logic [31:0]       mem_wr_addr,
  input  logic [VEC*32-1:0] mem_wr_data
);
  logic [VEC*32-1:0] mem [DEPTH];
  logic [VEC*32-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];
  bit                stall_en = STALL;  // may be changed by the testbench
  bit                wr_hold  = 1'b0;   // testbench may block all writes
  int                bad_addr = 0;
  int                rd_stalls = 0, wr_stalls = 0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_rd_req_ready <= 1'b0;
      mem_wr_ready     <= 1'b0;
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      mem_rd_req_ready <= stall_en ? ($urandom_range(0, 4) != 0) : 1'b1;
      mem_wr_ready     <= wr_hold ? 1'b0 : stall_en ? ($urandom_range(0, 4) != 0) : 1'b1;
      pipe_v[0] <= mem_rd_req_valid && mem_rd_req_ready;
      if (mem_rd_addr < DEPTH) pipe_d[0] <= mem[mem_rd_addr];
      else                     pipe_d[0] <= '0;
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (mem_rd_req_valid && mem_rd_req_ready && mem_rd_addr >= DEPTH) bad_addr++;
      if (mem_rd_req_valid && !mem_rd_req_ready) rd_stalls++;
      if (mem_wr_valid && !mem_wr_ready) wr_stalls++;
      if (mem_wr_valid && mem_wr_ready) begin
        if (mem_wr_addr < DEPTH) mem[mem_wr_addr] <= mem_wr_data;
        else bad_addr++;
      end
    end
  end

  assign mem_rd_rsp_valid = pipe_v[LAT-1];
  assign mem_rd_rsp_data  = pipe_d[LAT-1];
endmodule
