// tb_steroi_l2: end-to-end test of the L2 processor at its default size.
//
// A behavioural DRAM (with random request stalls) holds weights, input
// vectors, a depthwise kernel and stereo features, all generated here. The
// controller is configured with 7 bin boundaries, 8 mapping descriptors and
// two programs, then runs three frames:
//   frame A, ROI 21360 px (bin 2, everything powered): each of the 8 PEs gets
//     its own weight matrix, loaded once (weight stationary); per 8192-pixel
//     chunk one input vector is multicast to all PEs, all PEs multiply,
//     apply ReLU/shift, and their results are read back into DRAM; then both
//     SCUs run an 8-candidate L1 cost-volume search with argmin;
//   frame B, ROI 969 px (bin 0): only PE 0 of tile 0 powered; it runs a
//     depthwise op through the shuffle buffer; a packet sent to gated PE 1 is
//     dropped;
//   frame C, ROI 491520 px (bin 7): frame A's program over 60 chunks.
// Every DRAM result is compared with values computed in the testbench.
// Mechanism counters (multicast, packet split at a tile boundary, traffic on
// the second column link into a PE mesh, weight-stationary reuse, depthwise
// op, power-gated drop, bin change, loop iterations, DRAM stall, SCU argmin)
// must all be non-zero.
module tb_steroi_l2;
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
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [DRAM_AW-1:0] dram_req_addr;
  logic [FLIT_W-1:0] dram_req_wdata, dram_rsp_data;
  int checks = 0, failures = 0;

  steroi_l2 dut (.*);
  dram_model #(.DEPTH(4096), .LAT(4), .STALL(1)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- layout
  localparam int NPE_ALL  = N_TILES * N_PE;
  localparam int W_BASE   = 0;      // 8 weight matrices
  localparam int V_BASE   = 256;    // one input vector per chunk
  localparam int K_ADDR   = 64;     // depthwise kernel
  localparam int L_ADDR   = 80;     // left feature
  localparam int R0_BASE  = 81;     // right candidates for SCU 0
  localparam int R1_BASE  = 91;     // right candidates for SCU 1
  localparam int OUT_PE   = 1024;   // + chunk*16 + pe
  localparam int OUT_SCU  = 2048;
  localparam int OUT_DW   = 3072;
  localparam int CHUNK_LG = 13;     // 8192-pixel chunks

  function automatic int pe_ep_of(int p);
    return (p / N_PE) * EP_PER_TILE + (p % N_PE);
  endfunction
  function automatic dest_t all_pes();
    all_pes = '0;
    for (int p = 0; p < NPE_ALL; p++) all_pes[pe_ep_of(p)] = 1'b1;
  endfunction
  function automatic dest_t one(int e);
    one = '0; one[e] = 1'b1;
  endfunction

  // ---------------------------------------------------------- program build
  int pc_w;
  task automatic cfg(cfg_sel_e s, int idx, logic [CFG_W-1:0] d);
    @(negedge clk); cfg_valid = 1; cfg_sel = s; cfg_idx = 8'(idx); cfg_data = d;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic put(ci_op_e op, int cnt, int step, dma_cmd_t c);
    prog_ins_t i;
    i = '{op: op, cnt: 16'(cnt), step: 8'(step), cmd: c};
    cfg(CFG_PROG, pc_w, CFG_W'(i));
    pc_w++;
  endtask
  function automatic dma_cmd_t load(int da, int len, dest_t d, bit sel, int sa);
    load = '{op: DMA_LOAD, dram_addr: DRAM_AW'(da), len: (ADDR_W+1)'(len),
             pkt: '{dest: d, kind: PKT_WR, sel: sel, addr: ADDR_W'(sa), data: '0}};
  endfunction
  function automatic dma_cmd_t send(dest_t d, pkt_kind_e k, bit sel, int a, logic [FLIT_W-1:0] data);
    send = '{op: DMA_SEND, dram_addr: '0, len: '0, pkt: '{dest: d, kind: k, sel: sel, addr: ADDR_W'(a), data: data}};
  endfunction
  function automatic dma_cmd_t wbase(int a);
    wbase = '{op: DMA_WBASE, dram_addr: DRAM_AW'(a), len: '0, pkt: '0};
  endfunction
  function automatic logic [FLIT_W-1:0] rdreq(dest_t d, int a);
    rd_req_t r;
    r = '{dest: d, sel: 1'b0, addr: ADDR_W'(a)};
    return FLIT_W'(r);
  endfunction
  function automatic pe_op_t peop(int va, int ma, bit lv, bit lm, bit dw, int off, bit clr, bit wb, int wa, bit relu, int sh);
    peop = '{vec_addr: ADDR_W'(va), mat_addr: ADDR_W'(ma), load_vec: lv, load_mat: lm, depthwise: dw,
             lane_off: 2'(off), acc_clear: clr, wb: wb, wb_addr: ADDR_W'(wa), relu: relu, shift: 5'(sh)};
  endfunction
  function automatic scu_op_t scuop(int b, bit first, bit last);
    scuop = '{a_addr: '0, b_addr: ADDR_W'(b), sub: 1'b1, absval: 1'b1, neg: 1'b0, acc_en: 1'b0, acc_clear: 1'b0,
              min_en: 1'b1, min_clear: first, wb: last, wb_min: 1'b1, wb_addr: 8'd20};
  endfunction

  // ------------------------------------------------------------- reference
  function automatic logic signed [15:0] elem(logic [FLIT_W-1:0] w, int i);
    return w[i*16 +: 16];
  endfunction
  function automatic logic [15:0] requant(longint a, int sh, bit relu);
    longint r;
    r = a >>> sh;
    if (relu && r < 0) r = 0;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r[15:0];
  endfunction
  function automatic logic [63:0] ref_dense(int p, int chunk);
    logic [FLIT_W-1:0] w, v;
    w = u_dram.mem[W_BASE + p];
    v = u_dram.mem[V_BASE + chunk];
    for (int j = 0; j < MAT_M; j++) begin
      longint s;
      s = 0;
      for (int i = 0; i < VEC_N; i++) s += longint'(elem(v, i)) * longint'(elem(w, i*MAT_M + j));
      ref_dense[j*16 +: 16] = requant(s, 1, 1);
    end
  endfunction
  function automatic logic [47:0] ref_scu(int rbase);
    longint best, d;
    int bi;
    best = 0; bi = 0;
    for (int c = 0; c < 8; c++) begin
      d = 0;
      for (int i = 0; i < VEC_N; i++) begin
        longint a, b;
        a = elem(u_dram.mem[L_ADDR], i);
        b = elem(u_dram.mem[rbase + c], i);
        d += (a > b) ? a - b : b - a;
      end
      if (c == 0 || d < best) begin best = d; bi = c; end
    end
    return {16'(bi), 32'(best)};
  endfunction

  // -------------------------------------------------------------- counters
  int n_multicast = 0, n_split = 0, n_ws = 0, n_dw = 0, n_gated_drop = 0;
  int n_iters = 0, n_argmin = 0, n_bins = 0, n_col_links = 0;
  logic [NBINS-1:0] bins_seen = '0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_dram_io.out_valid && dut.u_dram_io.out_ready && $countones(dut.u_dram_io.out_pkt.dest) > 1)
      n_multicast++;
    if (dut.g_tile[0].u_tile.e_out_valid && dut.g_tile[0].u_tile.e_out_ready &&
        (dut.g_tile[0].u_tile.u_trouter.buf_pkt[TP_W].dest & ~tile_route(0, TP_E)) != '0)
      n_split++;
    if (dut.g_tile[1].u_tile.g_y[1].g_x[1].u_pe.state == 3'd2 && !dut.g_tile[1].u_tile.g_y[1].g_x[1].u_pe.op.load_mat)
      n_ws++;
    if (dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.state == 3'd3 && dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.op.depthwise)
      n_dw++;
    if (dut.g_tile[0].u_tile.g_y[0].g_x[1].u_pe.in_valid && !dut.g_tile[0].u_tile.g_y[0].g_x[1].u_pe.pwr_en)
      n_gated_drop++;
    for (int x = 1; x < PE_X; x++)
      if (dut.g_tile[1].u_tile.t_ov[TP_MESH+x] && dut.g_tile[1].u_tile.t_or[TP_MESH+x]) n_col_links++;
    if (dut.u_ctrl.state == dut.u_ctrl.C_FETCH && dut.u_ctrl.ins.op == CI_ENDL) n_iters++;
    if (dut.g_tile[0].u_tile.u_scu.state == 3'd4 && dut.g_tile[0].u_tile.u_scu.op.min_en &&
        !dut.g_tile[0].u_tile.u_scu.op.min_clear && dut.g_tile[0].u_tile.u_scu.val < dut.g_tile[0].u_tile.u_scu.minv)
      n_argmin++;
  end

  task automatic run_frame(int roi, output int cycles);
    @(negedge clk); start = 1; roi_size = ROI_W'(roi);
    @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    bins_seen[bin] = 1'b1;
  endtask

  task automatic check_dense(int nchunks);
    for (int c = 0; c < nchunks; c++)
      for (int p = 0; p < NPE_ALL; p++) begin
        logic [63:0] e;
        e = ref_dense(p, c);
        checks++;
        if (u_dram.mem[OUT_PE + c*16 + p][63:0] !== e) begin
          failures++;
          $display("chunk %0d PE %0d: got %h exp %h", c, p, u_dram.mem[OUT_PE + c*16 + p][63:0], e);
        end
      end
  endtask

  initial begin
    int cyc;
    int bounds [7] = '{2314, 21360, 32967, 79464, 192000, 296808, 461280};
    rst_n = 0; cfg_valid = 0; cfg_sel = CFG_BOUND; cfg_idx = 0; cfg_data = '0; start = 0; roi_size = 0;
    // DRAM contents
    for (int a = 0; a < 4096; a++) u_dram.mem[a] = '0;
    for (int a = 0; a < 8; a++)
      for (int i = 0; i < VEC_N*MAT_M; i++) u_dram.mem[W_BASE + a][i*16 +: 16] = 16'($signed($urandom % 128) - 64);
    for (int a = 0; a < 64; a++)
      for (int i = 0; i < VEC_N; i++) u_dram.mem[V_BASE + a][i*16 +: 16] = 16'($signed($urandom % 256) - 128);
    for (int i = 0; i < VEC_N; i++) u_dram.mem[K_ADDR][i*16 +: 16] = 16'($signed($urandom % 128) - 64);
    for (int a = L_ADDR; a < R1_BASE + 8; a++)
      for (int i = 0; i < VEC_N; i++) u_dram.mem[a][i*16 +: 16] = 16'($signed($urandom % 2000) - 1000);
    repeat (3) @(negedge clk); rst_n = 1;

    // binned mapping tables
    for (int b = 0; b < 7; b++) cfg(CFG_BOUND, b, CFG_W'(bounds[b]));
    for (int b = 0; b < NBINS; b++) begin
      desc_t d;
      d.dram_mode = (b == 0) ? 2'd0 : 2'd2;
      d.tile_en   = (b == 0) ? 2'b01 : 2'b11;
      d.pe_en     = (b == 0) ? 8'b0000_0001 : 8'hff;
      d.scu_en    = (b == 0) ? 2'b00 : 2'b11;
      d.prog_base = (b == 0) ? PC_W'(41) : PC_W'(0);
      cfg(CFG_DESC, b, CFG_W'(d));
    end
    // program for the larger bins
    pc_w = 0;
    put(CI_DMA, 0, 0, load(W_BASE, 8, all_pes(), 1'b1, 0));
    for (int p = 0; p < NPE_ALL; p++)
      put(CI_DMA, 0, 0, send(one(pe_ep_of(p)), PKT_EXEC, 1'b0, 0, FLIT_W'(peop(0, p, 0, 1, 0, 0, 1, 0, 0, 0, 0))));
    put(CI_LOOP, CHUNK_LG, 0, '0);
    put(CI_DMA, 0, 16, wbase(OUT_PE));
    put(CI_DMA, 0, 1, load(V_BASE, 1, all_pes(), 1'b0, 0));
    put(CI_DMA, 0, 0, send(all_pes(), PKT_EXEC, 1'b0, 0, FLIT_W'(peop(0, 0, 1, 0, 0, 0, 1, 1, 20, 1, 1))));
    put(CI_WAIT, 20, 0, '0);
    for (int p = 0; p < NPE_ALL; p++)
      put(CI_DMA, 0, 0, send(one(pe_ep_of(p)), PKT_RD, 1'b1, 20, rdreq(one(DRAM_EP), p)));
    put(CI_WAIT, 30, 0, '0);
    put(CI_ENDL, 0, 0, '0);
    put(CI_DMA, 0, 0, load(L_ADDR, 1, one(scu_ep(0)) | one(scu_ep(1)), 1'b0, 0));
    put(CI_DMA, 0, 0, load(R0_BASE, 8, one(scu_ep(0)), 1'b1, 0));
    put(CI_DMA, 0, 0, load(R1_BASE, 8, one(scu_ep(1)), 1'b1, 0));
    for (int c = 0; c < 8; c++)
      put(CI_DMA, 0, 0, send(one(scu_ep(0)) | one(scu_ep(1)), PKT_EXEC, 1'b0, 0, FLIT_W'(scuop(c, c == 0, c == 7))));
    put(CI_WAIT, 20, 0, '0);
    put(CI_DMA, 0, 0, wbase(OUT_SCU));
    put(CI_DMA, 0, 0, send(one(scu_ep(0)), PKT_RD, 1'b1, 20, rdreq(one(DRAM_EP), 0)));
    put(CI_DMA, 0, 0, send(one(scu_ep(1)), PKT_RD, 1'b1, 20, rdreq(one(DRAM_EP), 1)));
    put(CI_WAIT, 40, 0, '0);
    put(CI_END, 0, 0, '0);
    if (pc_w > 41) $display("program overlap: %0d", pc_w);
    // program for the smallest bin
    pc_w = 41;
    put(CI_DMA, 0, 0, load(K_ADDR, 1, one(pe_ep_of(0)), 1'b1, 2));
    put(CI_DMA, 0, 0, load(V_BASE + 5, 1, one(pe_ep_of(0)), 1'b0, 1));
    put(CI_DMA, 0, 0, send(one(pe_ep_of(1)), PKT_WR, 1'b0, 0, '1));
    put(CI_DMA, 0, 0, send(one(pe_ep_of(0)), PKT_EXEC, 1'b0, 0, FLIT_W'(peop(1, 2, 1, 1, 1, 2, 1, 1, 6, 0, 0))));
    put(CI_WAIT, 20, 0, '0);
    put(CI_DMA, 0, 0, wbase(OUT_DW));
    put(CI_DMA, 0, 0, send(one(pe_ep_of(0)), PKT_RD, 1'b1, 6, rdreq(one(DRAM_EP), 0)));
    put(CI_WAIT, 40, 0, '0);
    put(CI_END, 0, 0, '0);

    // ---- frame A
    run_frame(21360, cyc);
    $display("frame A (ROI 21360, bin %0d): %0d cycles", bin, cyc);
    checks++;
    if (bin != 2 || pe_pwr_en != 8'hff || scu_pwr_en != 2'b11) begin failures++; $display("frame A bin/power wrong"); end
    check_dense(3);
    checks++;
    if (u_dram.mem[OUT_SCU][47:0] !== ref_scu(R0_BASE)) begin failures++; $display("SCU0 got %h exp %h", u_dram.mem[OUT_SCU][47:0], ref_scu(R0_BASE)); end
    checks++;
    if (u_dram.mem[OUT_SCU+1][47:0] !== ref_scu(R1_BASE)) begin failures++; $display("SCU1 got %h exp %h", u_dram.mem[OUT_SCU+1][47:0], ref_scu(R1_BASE)); end
    // ---- frame B
    run_frame(969, cyc);
    $display("frame B (ROI 969, bin %0d): %0d cycles", bin, cyc);
    checks++;
    if (bin != 0 || pe_pwr_en != 8'h01 || scu_pwr_en != 2'b00) begin failures++; $display("frame B bin/power wrong"); end
    begin
      logic [63:0] e;
      e = '0;
      for (int i = 0; i < VEC_N; i++)
        e[((i + 2) % MAT_M)*16 +: 16] = requant(longint'(elem(u_dram.mem[V_BASE + 5], i)) * elem(u_dram.mem[K_ADDR], i), 0, 0);
      checks++;
      if (u_dram.mem[OUT_DW][63:0] !== e) begin failures++; $display("depthwise got %h exp %h", u_dram.mem[OUT_DW][63:0], e); end
    end
    // ---- frame C: largest ROI, 60 chunks
    for (int c = 0; c < 64; c++) for (int p = 0; p < 16; p++) u_dram.mem[OUT_PE + c*16 + p] = '0;
    run_frame(491520, cyc);
    $display("frame C (ROI 491520, bin %0d): %0d cycles", bin, cyc);
    checks++;
    if (bin != 7) begin failures++; $display("frame C bin %0d", bin); end
    check_dense(60);

    n_bins = $countones(bins_seen);
    $display("mechanisms: multicast=%0d tile_split=%0d weight_stationary=%0d depthwise=%0d gated_drop=%0d",
             n_multicast, n_split, n_ws, n_dw, n_gated_drop);
    $display("            loop_iterations=%0d argmin_updates=%0d bins=%0d dram_stalls=%0d column_links=%0d",
             n_iters, n_argmin, n_bins, u_dram.stalls, n_col_links);
    checks++; if (n_col_links == 0)   begin failures++; $display("second mesh column link never used"); end
    checks++; if (n_multicast == 0)   begin failures++; $display("multicast never happened"); end
    checks++; if (n_split == 0)       begin failures++; $display("tile split never happened"); end
    checks++; if (n_ws == 0)          begin failures++; $display("weight stationary never happened"); end
    checks++; if (n_dw == 0)          begin failures++; $display("depthwise never happened"); end
    checks++; if (n_gated_drop == 0)  begin failures++; $display("gated drop never happened"); end
    checks++; if (n_iters != 63)      begin failures++; $display("loop iterations %0d, expected 63", n_iters); end
    checks++; if (n_argmin == 0)      begin failures++; $display("argmin never updated"); end
    checks++; if (n_bins != 3)        begin failures++; $display("bins seen %0d", n_bins); end
    checks++; if (u_dram.stalls == 0) begin failures++; $display("DRAM stall never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
