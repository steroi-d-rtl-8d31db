// vmm: vector-matrix multiplier of a PE.
//
// y[j] = sum over i of x[i] * w[i][j], signed, for a VEC_N-element input
// vector and a VEC_N x MAT_M matrix. Purely combinational: the PE registers
// the result in its accumulator the same cycle. Element i of x sits in bits
// [i*DATA_W +: DATA_W]; element (i,j) of w in bits [(i*MAT_M+j)*DATA_W +: DATA_W];
// y[j] in bits [j*OUT_W +: OUT_W]. The paper gives the VMM's role; its size
// and this layout are this design's choice.
module vmm #(
  parameter int VEC_N  = 4,
  parameter int MAT_M  = 4,
  parameter int DATA_W = 16,
  parameter int OUT_W  = 40
) (
  input  logic [VEC_N*DATA_W-1:0]       x,
  input  logic [VEC_N*MAT_M*DATA_W-1:0] w,
  output logic [MAT_M*OUT_W-1:0]        y
);
  always_comb begin
    for (int j = 0; j < MAT_M; j++) begin
      logic signed [OUT_W-1:0] s;
      s = '0;
      for (int i = 0; i < VEC_N; i++) begin
        s += OUT_W'($signed(x[i*DATA_W +: DATA_W]) *
                    $signed(w[(i*MAT_M+j)*DATA_W +: DATA_W]));
      end
      y[j*OUT_W +: OUT_W] = s;
    end
  end
endmodule
