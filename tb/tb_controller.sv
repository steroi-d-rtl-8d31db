// tb_controller: self-checking test of the binned-mapping controller.
// Loads 7 bin boundaries (the ROI sizes that open each new bin), 8 mapping
// descriptors and two programs: a looped one for large ROIs (one DRAM load and
// one packet per 4096-pixel chunk, then a wait) and a short one for small ROIs.
// For ROI sizes across the whole range it checks the chosen bin, the power
// enables (descriptor masks gated by tile enables), the DRAM mode tag, the
// number and addresses of the commands issued (ceil(roi/4096) iterations,
// address advanced by iteration*step), that CI_WAIT holds while the DRAM I/O
// is busy, and the done pulse.
module tb_controller;
  import steroi_pkg::*;
  logic clk = 0, rst_n;
  logic cfg_valid;
  cfg_sel_e cfg_sel;
  logic [7:0] cfg_idx;
  logic [CFG_W-1:0] cfg_data;
  logic start, busy, done;
  logic [ROI_W-1:0] roi_size;
  logic [$clog2(NBINS)-1:0] bin;
  logic [1:0] dram_mode;
  logic [N_TILES*N_PE-1:0] pe_pwr_en;
  logic [N_TILES-1:0] scu_pwr_en;
  logic cmd_valid, cmd_ready, dma_busy;
  dma_cmd_t cmd;
  int checks = 0, failures = 0;

  controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bounds [7] = '{2314, 21360, 32967, 79464, 192000, 296808, 461280};
  desc_t descs [NBINS];
  dma_cmd_t got [$];
  int wait_seen = 0;

  // DRAM I/O stand-in: random ready, busy for a few cycles after each command
  int busy_cnt = 0;
  always @(negedge clk) begin
    cmd_ready = ($urandom % 2) == 0;
    dma_busy  = busy_cnt > 0;
    if (busy_cnt > 0) busy_cnt--;
  end
  always @(posedge clk) if (cmd_valid && cmd_ready) begin
    got.push_back(cmd);
    busy_cnt = 3;
  end
  always @(posedge clk) if (dut.state == dut.C_WAIT && dma_busy) wait_seen++;

  task automatic cfg(cfg_sel_e s, int idx, logic [CFG_W-1:0] d);
    @(negedge clk); cfg_valid = 1; cfg_sel = s; cfg_idx = 8'(idx); cfg_data = d;
    @(negedge clk); cfg_valid = 0;
  endtask

  function automatic prog_ins_t ins(ci_op_e op, int cnt, int step, dma_cmd_t c);
    ins = '{op: op, cnt: 16'(cnt), step: 8'(step), cmd: c};
  endfunction

  initial begin
    dma_cmd_t ld, sd;
    int roi_list [10] = '{969, 1491, 2314, 13696, 21360, 51336, 79464, 192000, 461280, 491520};
    rst_n = 0; cfg_valid = 0; cfg_sel = CFG_BOUND; cfg_idx = 0; cfg_data = '0; start = 0; roi_size = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    checks++;
    if (pe_pwr_en != '0 || scu_pwr_en != '0) begin failures++; $display("power enables not off after reset"); end
    for (int b = 0; b < 7; b++) cfg(CFG_BOUND, b, CFG_W'(bounds[b]));
    for (int b = 0; b < NBINS; b++) begin
      descs[b].dram_mode = 2'(b / 3);
      descs[b].tile_en   = (b < 2) ? 2'b01 : 2'b11;
      descs[b].pe_en     = (b == 0) ? 8'b0000_0001 : (b < 4) ? 8'b1111_0011 : 8'hff;
      descs[b].scu_en    = (b == 5) ? 2'b01 : 2'b11;
      descs[b].prog_base = (b < 4) ? 6'd8 : 6'd0;
      cfg(CFG_DESC, b, CFG_W'(descs[b]));
    end
    ld = '{op: DMA_LOAD, dram_addr: 20'h100, len: 9'd1, pkt: '{dest: dest_t'(3), kind: PKT_WR, sel: 1'b1, addr: 8'd0, data: '0}};
    sd = '{op: DMA_SEND, dram_addr: '0, len: '0, pkt: '{dest: dest_t'(4), kind: PKT_EXEC, sel: 1'b0, addr: 8'd0, data: FLIT_W'(77)}};
    cfg(CFG_PROG, 0, CFG_W'(ins(CI_LOOP, 12, 0, '0)));
    cfg(CFG_PROG, 1, CFG_W'(ins(CI_DMA, 0, 2, ld)));
    cfg(CFG_PROG, 2, CFG_W'(ins(CI_DMA, 0, 0, sd)));
    cfg(CFG_PROG, 3, CFG_W'(ins(CI_ENDL, 0, 0, '0)));
    cfg(CFG_PROG, 4, CFG_W'(ins(CI_WAIT, 3, 0, '0)));
    cfg(CFG_PROG, 5, CFG_W'(ins(CI_END, 0, 0, '0)));
    cfg(CFG_PROG, 8, CFG_W'(ins(CI_DMA, 0, 0, sd)));
    cfg(CFG_PROG, 9, CFG_W'(ins(CI_WAIT, 0, 0, '0)));
    cfg(CFG_PROG, 10, CFG_W'(ins(CI_END, 0, 0, '0)));

    foreach (roi_list[r]) begin
      int eb, iters, ncmd;
      logic [N_TILES*N_PE-1:0] epe;
      logic [N_TILES-1:0] escu;
      eb = 0;
      for (int b = 0; b < 7; b++) if (roi_list[r] >= bounds[b]) eb++;
      got.delete();
      @(negedge clk); start = 1; roi_size = ROI_W'(roi_list[r]);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (bin !== 3'(eb)) begin failures++; $display("roi %0d: bin %0d exp %0d", roi_list[r], bin, eb); end
      for (int t = 0; t < N_TILES; t++) begin
        epe[t*N_PE +: N_PE] = descs[eb].pe_en[t*N_PE +: N_PE] & {N_PE{descs[eb].tile_en[t]}};
        escu[t] = descs[eb].scu_en[t] & descs[eb].tile_en[t];
      end
      checks++;
      if (pe_pwr_en !== epe || scu_pwr_en !== escu || dram_mode !== descs[eb].dram_mode) begin
        failures++; $display("roi %0d: power %b/%b exp %b/%b", roi_list[r], pe_pwr_en, scu_pwr_en, epe, escu);
      end
      iters = (roi_list[r] + 4095) / 4096;
      ncmd = (eb < 4) ? 1 : 2 * iters;
      checks++;
      if (got.size() != ncmd) begin failures++; $display("roi %0d: %0d commands exp %0d", roi_list[r], got.size(), ncmd); end
      else if (eb >= 4) begin
        for (int i = 0; i < iters; i++) begin
          checks++;
          if (got[2*i].op !== DMA_LOAD || got[2*i].dram_addr !== 20'(32'h100 + 2*i) || got[2*i+1] !== sd) begin
            failures++; $display("roi %0d: iteration %0d command wrong", roi_list[r], i);
          end
        end
      end
    end
    checks++;
    if (wait_seen == 0) begin failures++; $display("CI_WAIT never held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
