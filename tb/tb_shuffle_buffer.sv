// tb_shuffle_buffer: self-checking test of the depthwise shuffle buffer.
// Loads random kernel vectors and checks, for every lane offset, that the
// matrix has kvec[i] at (i, (i+off) mod M) and zero elsewhere, and that the
// stored vector is kept while load is low.
module tb_shuffle_buffer;
  localparam int N = 4, M = 4, DW = 16;
  logic clk = 0, rst_n, load;
  logic [N*DW-1:0] kvec, held;
  logic [1:0] lane_off;
  logic [N*M*DW-1:0] w;
  int checks = 0, failures = 0;

  shuffle_buffer #(.VEC_N(N), .MAT_M(M), .DATA_W(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_matrix(input logic [N*DW-1:0] k);
    for (int off = 0; off < M; off++) begin
      lane_off = 2'(off); #1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++) begin
          logic [DW-1:0] e;
          e = (j == (i + off) % M) ? k[i*DW +: DW] : '0;
          checks++;
          if (w[(i*M+j)*DW +: DW] !== e) begin
            failures++; $display("off %0d w[%0d][%0d]=%h exp %h", off, i, j, w[(i*M+j)*DW +: DW], e);
          end
        end
    end
  endtask

  initial begin
    rst_n = 0; load = 0; kvec = '0; lane_off = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    check_matrix('0);
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      kvec = {$urandom, $urandom}; load = 1; held = kvec;
      @(negedge clk); load = 0; kvec = {$urandom, $urandom};
      @(negedge clk);
      check_matrix(held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
