// sram_sp: single-port synchronous SRAM, written as an array.
//
// Stands for the local SRAMs of a PE (Vector SRAM, Matrix SRAM) and of an SCU
// (SRAM 0, SRAM 1). One access per cycle: with en=1 and we=1 the word at addr
// is written; with en=1 and we=0 it is read and appears on rdata on the next
// clock edge (rdata holds its value otherwise). The paper gives no capacity;
// the depth and width are parameters with this design's defaults. Contents are
// not reset, as in a real macro.
module sram_sp #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
