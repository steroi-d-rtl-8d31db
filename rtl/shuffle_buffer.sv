// shuffle_buffer: depthwise-convolution weight buffer of a PE.
//
// A depthwise convolution multiplies each channel by its own kernel tap, which
// a vector-matrix multiplier can only do through a diagonal matrix. The buffer
// captures a VEC_N-element kernel vector (load=1, one cycle) and presents it as
// a VEC_N x MAT_M matrix whose only non-zero entries are w[i][(i+lane_off) mod
// MAT_M] = kvec[i]. lane_off lets a group of channels land on chosen VMM
// outputs. Output is combinational from the stored vector. The paper only names
// the shuffle buffer and its purpose; the diagonal placement is this design's.
module shuffle_buffer #(
  parameter int VEC_N  = 4,
  parameter int MAT_M  = 4,
  parameter int DATA_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [VEC_N*DATA_W-1:0]       kvec,
  input  logic [$clog2(MAT_M)-1:0]      lane_off,
  output logic [VEC_N*MAT_M*DATA_W-1:0] w
);
  logic [VEC_N*DATA_W-1:0] kbuf;

  always_ff @(posedge clk) begin
    if (!rst_n)    kbuf <= '0;
    else if (load) kbuf <= kvec;
  end

  always_comb begin
    w = '0;
    for (int i = 0; i < VEC_N; i++)
      for (int j = 0; j < MAT_M; j++)
        if (j == (i + int'(lane_off)) % MAT_M)
          w[(i*MAT_M+j)*DATA_W +: DATA_W] = kbuf[i*DATA_W +: DATA_W];
  end
endmodule
