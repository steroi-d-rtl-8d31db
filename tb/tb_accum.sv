// tb_accum: self-checking test of the per-lane accumulator.
// Random sequences of clear, add and hold cycles with signed inputs, checked
// against a reference sum kept in the testbench after every clock edge.
module tb_accum;
  localparam int L = 4, IW = 40, AW = 40;
  logic clk = 0, rst_n, en, clear;
  logic [L*IW-1:0] din;
  logic [L*AW-1:0] acc;
  longint model [L];
  int checks = 0, failures = 0;

  accum #(.LANES(L), .IN_W(IW), .ACC_W(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; en = 0; clear = 0; din = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) model[l] = 0;
    for (int n = 0; n < 1000; n++) begin
      en = ($urandom % 4) != 0;
      clear = ($urandom % 6) == 0;
      for (int l = 0; l < L; l++) din[l*IW +: IW] = IW'($signed(32'($urandom)) >>> ($urandom % 16));
      @(negedge clk);
      if (en) for (int l = 0; l < L; l++)
        model[l] = (clear ? 0 : model[l]) + longint'($signed(din[l*IW +: IW]));
      for (int l = 0; l < L; l++) begin
        checks++;
        if (longint'($signed(acc[l*AW +: AW])) != model[l]) begin
          failures++; $display("n %0d lane %0d got %0d exp %0d", n, l, $signed(acc[l*AW +: AW]), model[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
