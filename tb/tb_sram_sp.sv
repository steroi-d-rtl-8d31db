// tb_sram_sp: self-checking test of the single-port SRAM.
// Writes random words to random addresses, keeps a reference copy, and reads
// them back, checking that data appears exactly one cycle after the read and
// that rdata holds when the SRAM is idle.
module tb_sram_sp;
  localparam int DEPTH = 64, WIDTH = 24;
  logic clk = 0;
  logic en, we;
  logic [$clog2(DEPTH)-1:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); en = 1; we = 1; addr = a[$clog2(DEPTH)-1:0];
      wdata = WIDTH'($urandom); ref_mem[a] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = 1; addr = $clog2(DEPTH)'($urandom);
      we = ($urandom % 3) == 0;
      wdata = WIDTH'($urandom);
      if (we) begin
        ref_mem[addr] = wdata;
      end else begin
        logic [WIDTH-1:0] exp;
        exp = ref_mem[addr];
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++; $display("read %0d: got %h exp %h", addr, rdata, exp);
        end
        @(negedge clk);
        checks++;
        if (rdata !== exp) begin failures++; $display("rdata did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
