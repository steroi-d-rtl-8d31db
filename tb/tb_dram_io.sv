// tb_dram_io: self-checking test of the DRAM I/O bridge.
// A behavioural DRAM with random request stalls feeds it. Checks: a DMA_LOAD
// of 6 words turns into 6 write multipackets with the right destination set,
// SRAM select, incrementing SRAM address and DRAM data; a DMA_SEND injects its
// packet unchanged; write packets arriving from the NoC land in DRAM at the
// store base plus {sel, addr}; busy falls when the work is done; NoC
// backpressure on the output is respected.
module tb_dram_io;
  import steroi_pkg::*;
  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready, busy;
  dma_cmd_t cmd;
  logic out_valid, out_ready, in_valid, in_ready;
  pkt_t out_pkt, in_pkt;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [DRAM_AW-1:0] dram_req_addr;
  logic [FLIT_W-1:0] dram_req_wdata, dram_rsp_data;
  int checks = 0, failures = 0;

  dram_io dut (.*);
  dram_model #(.DEPTH(1024), .LAT(3), .STALL(1)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 3 != 0);

  task automatic issue(dma_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask
  task automatic get(output pkt_t p);
    @(posedge clk);
    while (!(out_valid && out_ready)) @(posedge clk);
    p = out_pkt;
  endtask

  initial begin
    pkt_t p;
    dest_t dm;
    rst_n = 0; cmd_valid = 0; cmd = '0; in_valid = 0; in_pkt = '0;
    for (int i = 0; i < 1024; i++) u_dram.mem[i] = {8{$urandom}};
    repeat (3) @(negedge clk); rst_n = 1;
    // LOAD 6 words from 100 to PEs {0,2,3} Matrix SRAM at 20..25
    dm = dest_t'(11'b000_0000_1101);
    issue('{op: DMA_LOAD, dram_addr: 20'd100, len: 9'd6,
            pkt: '{dest: dm, kind: PKT_WR, sel: 1'b1, addr: 8'd20, data: '0}});
    for (int k = 0; k < 6; k++) begin
      get(p);
      checks++;
      if (p.dest !== dm || p.kind !== PKT_WR || p.sel !== 1'b1 || p.addr !== 8'(20 + k) ||
          p.data !== u_dram.mem[100 + k]) begin
        failures++; $display("load word %0d wrong: addr %0d", k, p.addr);
      end
    end
    // SEND
    issue('{op: DMA_SEND, dram_addr: '0, len: '0,
            pkt: '{dest: dest_t'(11'b100), kind: PKT_EXEC, sel: 1'b0, addr: 8'd7, data: FLIT_W'(256'hdeadbeef)}});
    get(p);
    checks++;
    if (p.dest !== dest_t'(11'b100) || p.kind !== PKT_EXEC || p.data !== FLIT_W'(256'hdeadbeef)) begin
      failures++; $display("send mismatch");
    end
    // stores from the NoC
    issue('{op: DMA_WBASE, dram_addr: 20'd512, len: '0, pkt: '0});
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      in_pkt = '{dest: dest_t'(1 << DRAM_EP), kind: PKT_WR, sel: k[0], addr: 8'(3 + k), data: {8{$urandom}}};
      in_valid = 1;
      @(posedge clk); while (!in_ready) @(posedge clk);
      p = in_pkt;
      #1 in_valid = 0;
      @(negedge clk);
      checks++;
      if (u_dram.mem[512 + {k[0], 8'(3 + k)}] !== p.data) begin failures++; $display("store %0d missing", k); end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy stuck"); end
    $display("DRAM request stalls seen: %0d", u_dram.stalls);
    checks++;
    if (u_dram.stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
