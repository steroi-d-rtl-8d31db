// dram_model: behavioural model of the off-chip DRAM for testbenches.
// Not synthesizable logic of the design: a word array with a request port
// (valid/ready, we, addr, wdata) and in-order read responses LAT cycles after
// each accepted read. With STALL=1 the request ready is dropped on random
// cycles to exercise backpressure; stalls counts those cycles.
module dram_model
  import steroi_pkg::*;
#(
  parameter int DEPTH = 4096,
  parameter int LAT   = 4,
  parameter bit STALL = 1
) (
  input  logic               clk,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [DRAM_AW-1:0] req_addr,
  input  logic [FLIT_W-1:0]  req_wdata,
  output logic               rsp_valid,
  output logic [FLIT_W-1:0]  rsp_data
);
  logic [FLIT_W-1:0] mem [DEPTH];
  logic [FLIT_W-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];
  int stalls = 0;
  int reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    req_ready = 1;
  end

  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr % DEPTH] <= req_wdata;
        writes++;
      end else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= mem[req_addr % DEPTH];
        reads++;
      end
    end
  end

  always @(negedge clk) begin
    req_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
    if (STALL && req_valid && !req_ready) stalls++;
  end
endmodule
