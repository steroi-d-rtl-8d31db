// accum: per-lane accumulator register (the "Accum" of the PE and the SCU).
//
// When en=1 each lane loads din (clear=1) or adds din to its value (clear=0);
// the result is visible on acc after the clock edge. Inputs are signed and
// sign-extended to ACC_W; addition wraps. Synchronous active-low reset clears
// all lanes. The paper names the accumulator; widths are this design's choice.
module accum #(
  parameter int LANES = 4,
  parameter int IN_W  = 40,
  parameter int ACC_W = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   clear,
  input  logic [LANES*IN_W-1:0]  din,
  output logic [LANES*ACC_W-1:0] acc
);
  always_ff @(posedge clk) begin
    if (!rst_n) acc <= '0;
    else if (en) begin
      for (int l = 0; l < LANES; l++) begin
        logic signed [ACC_W-1:0] a;
        a = ACC_W'($signed(din[l*IN_W +: IN_W]));
        acc[l*ACC_W +: ACC_W] <= clear ? a : acc[l*ACC_W +: ACC_W] + a;
      end
    end
  end
endmodule
