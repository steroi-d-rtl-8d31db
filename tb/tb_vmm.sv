// tb_vmm: self-checking test of the vector-matrix multiplier.
// Random signed vectors and matrices, including the extreme values; each
// output column is compared with a dot product worked out in the testbench.
module tb_vmm;
  localparam int N = 4, M = 4, DW = 16, OW = 40;
  logic [N*DW-1:0] x;
  logic [N*M*DW-1:0] w;
  logic [M*OW-1:0] y;
  int checks = 0, failures = 0;

  vmm #(.VEC_N(N), .MAT_M(M), .DATA_W(DW), .OUT_W(OW)) dut (.*);

  function automatic logic [DW-1:0] rnd();
    case ($urandom % 5)
      0: return 16'h8000;
      1: return 16'h7fff;
      default: return DW'($urandom);
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < N; i++) x[i*DW +: DW] = rnd();
      for (int k = 0; k < N*M; k++) w[k*DW +: DW] = rnd();
      #1;
      for (int j = 0; j < M; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < N; i++)
          e += longint'($signed(x[i*DW +: DW])) * longint'($signed(w[(i*M+j)*DW +: DW]));
        checks++;
        if (longint'($signed(y[j*OW +: OW])) != e) begin
          failures++; $display("col %0d got %0d exp %0d", j, $signed(y[j*OW +: OW]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
