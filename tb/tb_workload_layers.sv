// tb_workload_layers: slices of the two evaluated network types run through
// the whole L2 processor at its default size.
//
//   Convolution layer step (object-detection style): one output pixel of a
//   layer with 8 input and 4 output channels, computed two ways.
//     channel first (spatial): PE 0 multiplies input channels 0-3, PE 1
//       channels 4-7; PE 1's partial sum travels over the NoC into PE 0's
//       Vector SRAM (a read request whose reply goes PE to PE), and PE 0 adds
//       it with a VMM op whose matrix is the identity, then applies ReLU/shift.
//     channel last (temporal): PE 2 runs both channel groups back to back,
//       accumulating, and writes back once.
//   Both results go to DRAM and must equal the reference.
//   Stereo cost volume (HITNet style): two SCUs each search 8 disparities for
//     3 neighbouring pixels of a row: cost(x,d) = L1(left[x], right[x+7-d]),
//     disparity(x) = argmin_d cost. Left/right feature words are loaded once
//     from DRAM; each of the 24 match ops goes to both SCUs as one multipacket.
//     Disparity and minimum cost of all 6 pixels are read back and checked.
//   Max-pool (object-detection style): SCU 0 finds the maximum of a 2x2
//     window (four words, value in lane 0) as the minimum of negated values,
//     with its position.
// Everything is programmed through the controller's configuration port and
// run as one frame (ROI 21360 px, all units on). Counters for the
// channel-first identity op, the PE-to-PE transfer, the temporal accumulation
// and argmin updates must be non-zero.
module tb_workload_layers;
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
  dram_model #(.DEPTH(1024), .LAT(4), .STALL(1)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM layout
  localparam int WA   = 0;    // W group 0, W group 1, identity
  localparam int XA   = 8;    // x group 0, x group 1
  localparam int LA0  = 16;   // left features, SCU 0 (3 words)
  localparam int LA1  = 20;   // left features, SCU 1
  localparam int RA0  = 32;   // right features, SCU 0 (10 words)
  localparam int RA1  = 48;   // right features, SCU 1
  localparam int PA   = 64;   // max-pool window (4 words, value in lane 0)
  localparam int OUT  = 512;
  localparam int NPIX = 3, NDISP = 8;

  function automatic dest_t one(int e);
    one = '0; one[e] = 1'b1;
  endfunction

  int pc_w;
  task automatic cfg(cfg_sel_e s, int idx, logic [CFG_W-1:0] d);
    @(negedge clk); cfg_valid = 1; cfg_sel = s; cfg_idx = 8'(idx); cfg_data = d;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic put(ci_op_e op, int cnt, dma_cmd_t c);
    prog_ins_t i;
    i = '{op: op, cnt: 16'(cnt), step: 8'd0, cmd: c};
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
  function automatic logic [FLIT_W-1:0] rdreq(dest_t d, bit sel, int a);
    rd_req_t r;
    r = '{dest: d, sel: sel, addr: ADDR_W'(a)};
    return FLIT_W'(r);
  endfunction
  function automatic pe_op_t peop(int va, int ma, bit clr, bit wb, bit relu, int sh);
    peop = '{vec_addr: ADDR_W'(va), mat_addr: ADDR_W'(ma), load_vec: 1'b1, load_mat: 1'b1, depthwise: 1'b0,
             lane_off: 2'd0, acc_clear: clr, wb: wb, wb_addr: 8'd10, relu: relu, shift: 5'(sh)};
  endfunction
  function automatic scu_op_t scuop(int x, int d);
    scuop = '{a_addr: ADDR_W'(x), b_addr: ADDR_W'(x + NDISP - 1 - d), sub: 1'b1, absval: 1'b1, neg: 1'b0,
              acc_en: 1'b0, acc_clear: 1'b0, min_en: 1'b1, min_clear: d == 0, wb: d == NDISP - 1,
              wb_min: 1'b1, wb_addr: ADDR_W'(20 + x)};
  endfunction

  function automatic longint el(int a, int i);
    return longint'($signed(u_dram.mem[a][i*16 +: 16]));
  endfunction
  function automatic logic [15:0] requant(longint a, int sh, bit relu);
    longint r;
    r = a >>> sh;
    if (relu && r < 0) r = 0;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r[15:0];
  endfunction
  function automatic longint partial(int g, int j);
    partial = 0;
    for (int i = 0; i < VEC_N; i++) partial += el(XA + g, i) * el(WA + g, i*MAT_M + j);
  endfunction

  // mechanism counters
  int n_identity = 0, n_p2p = 0, n_temporal = 0, n_argmin = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.state == 3'd3 && dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.op.mat_addr == 8'd2 &&
        !dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.op.acc_clear)
      n_identity++;
    if (dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.in_valid && dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.in_ready &&
        dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.in_pkt.kind == PKT_WR && dut.g_tile[0].u_tile.g_y[0].g_x[0].u_pe.in_pkt.addr == 8'd5)
      n_p2p++;
    if (dut.g_tile[0].u_tile.g_y[1].g_x[0].u_pe.state == 3'd3 && !dut.g_tile[0].u_tile.g_y[1].g_x[0].u_pe.op.acc_clear)
      n_temporal++;
    if (dut.g_tile[1].u_tile.u_scu.state == 3'd4 && !dut.g_tile[1].u_tile.u_scu.op.min_clear &&
        dut.g_tile[1].u_tile.u_scu.val < dut.g_tile[1].u_tile.u_scu.minv)
      n_argmin++;
  end

  initial begin
    int cyc;
    dest_t pe0, pe1, pe2, scu0, scu1;
    pe0 = one(pe_ep(0, 0, 0)); pe1 = one(pe_ep(0, 1, 0)); pe2 = one(pe_ep(0, 0, 1));
    scu0 = one(scu_ep(0)); scu1 = one(scu_ep(1));
    rst_n = 0; cfg_valid = 0; cfg_sel = CFG_BOUND; cfg_idx = 0; cfg_data = '0; start = 0; roi_size = 0;
    for (int a = 0; a < 1024; a++) u_dram.mem[a] = '0;
    for (int g = 0; g < 2; g++) begin
      for (int k = 0; k < VEC_N*MAT_M; k++) u_dram.mem[WA + g][k*16 +: 16] = 16'($signed($urandom % 64) - 32);
      for (int i = 0; i < VEC_N; i++) u_dram.mem[XA + g][i*16 +: 16] = 16'($signed($urandom % 128) - 64);
    end
    for (int i = 0; i < VEC_N; i++) u_dram.mem[WA + 2][(i*MAT_M + i)*16 +: 16] = 16'd1;
    for (int a = 0; a < NPIX; a++)
      for (int i = 0; i < VEC_N; i++) begin
        u_dram.mem[LA0 + a][i*16 +: 16] = 16'($signed($urandom % 512) - 256);
        u_dram.mem[LA1 + a][i*16 +: 16] = 16'($signed($urandom % 512) - 256);
      end
    for (int a = 0; a < NPIX + NDISP - 1; a++)
      for (int i = 0; i < VEC_N; i++) begin
        u_dram.mem[RA0 + a][i*16 +: 16] = 16'($signed($urandom % 512) - 256);
        u_dram.mem[RA1 + a][i*16 +: 16] = 16'($signed($urandom % 512) - 256);
      end
    for (int k = 0; k < 4; k++) u_dram.mem[PA + k][15:0] = 16'($signed($urandom % 2000) - 1000);
    repeat (3) @(negedge clk); rst_n = 1;

    // one descriptor for every bin: all units on, program at 0
    for (int b = 0; b < NBINS - 1; b++) cfg(CFG_BOUND, b, CFG_W'((b + 1) * 1000));
    for (int b = 0; b < NBINS; b++) begin
      desc_t d;
      d = '{dram_mode: 2'd1, tile_en: '1, pe_en: '1, scu_en: '1, prog_base: '0};
      cfg(CFG_DESC, b, CFG_W'(d));
    end
    pc_w = 0;
    // convolution step
    put(CI_DMA, 0, load(WA, 1, pe0 | pe2, 1'b1, 0));
    put(CI_DMA, 0, load(WA + 1, 1, pe1 | pe2, 1'b1, 1));
    put(CI_DMA, 0, load(WA + 2, 1, pe0, 1'b1, 2));
    put(CI_DMA, 0, load(XA, 1, pe0 | pe2, 1'b0, 0));
    put(CI_DMA, 0, load(XA + 1, 1, pe1 | pe2, 1'b0, 1));
    put(CI_DMA, 0, send(pe0, PKT_EXEC, 1'b0, 0, FLIT_W'(peop(0, 0, 1, 0, 0, 0))));
    put(CI_DMA, 0, send(pe1, PKT_EXEC, 1'b0, 0, FLIT_W'(peop(1, 1, 1, 1, 0, 0))));
    put(CI_DMA, 0, send(pe2, PKT_EXEC, 1'b0, 0, FLIT_W'(peop(0, 0, 1, 0, 0, 0))));
    put(CI_DMA, 0, send(pe2, PKT_EXEC, 1'b0, 0, FLIT_W'(peop(1, 1, 0, 1, 1, 2))));
    put(CI_WAIT, 10, '0);
    put(CI_DMA, 0, send(pe1, PKT_RD, 1'b1, 10, rdreq(pe0, 1'b0, 5)));
    put(CI_WAIT, 10, '0);
    put(CI_DMA, 0, send(pe0, PKT_EXEC, 1'b0, 0, FLIT_W'(peop(5, 2, 0, 1, 1, 2))));
    // cost volume
    put(CI_DMA, 0, load(LA0, NPIX, scu0, 1'b0, 0));
    put(CI_DMA, 0, load(LA1, NPIX, scu1, 1'b0, 0));
    put(CI_DMA, 0, load(RA0, NPIX + NDISP - 1, scu0, 1'b1, 0));
    put(CI_DMA, 0, load(RA1, NPIX + NDISP - 1, scu1, 1'b1, 0));
    for (int x = 0; x < NPIX; x++)
      for (int d = 0; d < NDISP; d++)
        put(CI_DMA, 0, send(scu0 | scu1, PKT_EXEC, 1'b0, 0, FLIT_W'(scuop(x, d))));
    // 2x2 max-pool window on SCU 0: maximum = -(minimum of negated values)
    put(CI_DMA, 0, load(PA, 4, scu0, 1'b0, 8));
    for (int k = 0; k < 4; k++)
      put(CI_DMA, 0, send(scu0, PKT_EXEC, 1'b0, 0, FLIT_W'(scu_op_t'{a_addr: ADDR_W'(8 + k), b_addr: '0,
          sub: 1'b0, absval: 1'b0, neg: 1'b1, acc_en: 1'b0, acc_clear: 1'b0, min_en: 1'b1,
          min_clear: k == 0, wb: k == 3, wb_min: 1'b1, wb_addr: 8'd30})));
    put(CI_WAIT, 20, '0);
    // results to DRAM
    put(CI_DMA, 0, '{op: DMA_WBASE, dram_addr: DRAM_AW'(OUT), len: '0, pkt: '0});
    put(CI_DMA, 0, send(pe0, PKT_RD, 1'b1, 10, rdreq(one(DRAM_EP), 1'b0, 0)));
    put(CI_DMA, 0, send(pe2, PKT_RD, 1'b1, 10, rdreq(one(DRAM_EP), 1'b0, 1)));
    for (int s = 0; s < 2; s++)
      for (int x = 0; x < NPIX; x++)
        put(CI_DMA, 0, send(s == 0 ? scu0 : scu1, PKT_RD, 1'b1, 20 + x, rdreq(one(DRAM_EP), 1'b0, 2 + s*NPIX + x)));
    put(CI_DMA, 0, send(scu0, PKT_RD, 1'b1, 30, rdreq(one(DRAM_EP), 1'b0, 8)));
    put(CI_WAIT, 40, '0);
    put(CI_END, 0, '0);
    checks++;
    if (pc_w > PROG_DEPTH) begin failures++; $display("program too long: %0d", pc_w); end

    @(negedge clk); start = 1; roi_size = ROI_W'(21360);
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("frame: %0d cycles, %0d instructions", cyc, pc_w);

    // convolution: channel first and channel last against the reference
    for (int j = 0; j < MAT_M; j++) begin
      logic [15:0] e_first, e_last;
      e_first = requant(partial(0, j) + longint'($signed(requant(partial(1, j), 0, 0))), 2, 1);
      e_last  = requant(partial(0, j) + partial(1, j), 2, 1);
      checks += 2;
      if (u_dram.mem[OUT][j*16 +: 16] !== e_first) begin
        failures++; $display("channel first ch %0d: got %h exp %h", j, u_dram.mem[OUT][j*16 +: 16], e_first);
      end
      if (u_dram.mem[OUT + 1][j*16 +: 16] !== e_last) begin
        failures++; $display("channel last ch %0d: got %h exp %h", j, u_dram.mem[OUT + 1][j*16 +: 16], e_last);
      end
    end
    // cost volume: disparity and cost per pixel
    for (int s = 0; s < 2; s++)
      for (int x = 0; x < NPIX; x++) begin
        longint best, c;
        int bd;
        best = 0; bd = 0;
        for (int d = 0; d < NDISP; d++) begin
          c = 0;
          for (int i = 0; i < VEC_N; i++) begin
            longint a, b;
            a = el((s == 0 ? LA0 : LA1) + x, i);
            b = el((s == 0 ? RA0 : RA1) + x + NDISP - 1 - d, i);
            c += (a > b) ? a - b : b - a;
          end
          if (d == 0 || c < best) begin best = c; bd = d; end
        end
        checks++;
        if (u_dram.mem[OUT + 2 + s*NPIX + x][47:0] !== {16'(bd), 32'(best)}) begin
          failures++;
          $display("SCU %0d pixel %0d: got %h exp disparity %0d cost %0d", s, x,
                   u_dram.mem[OUT + 2 + s*NPIX + x][47:0], bd, best);
        end
      end

    // max-pool: {index of the maximum, -maximum}
    begin
      longint mx;
      int mi;
      mx = el(PA, 0); mi = 0;
      for (int k = 1; k < 4; k++) if (el(PA + k, 0) > mx) begin mx = el(PA + k, 0); mi = k; end
      checks++;
      if (u_dram.mem[OUT + 8][47:0] !== {16'(mi), 32'(-mx)}) begin
        failures++; $display("max-pool: got %h exp index %0d max %0d", u_dram.mem[OUT + 8][47:0], mi, mx);
      end
    end
    $display("mechanisms: identity_add=%0d pe_to_pe=%0d temporal_acc=%0d argmin_updates=%0d",
             n_identity, n_p2p, n_temporal, n_argmin);
    checks++; if (n_identity == 0) begin failures++; $display("channel-first add never happened"); end
    checks++; if (n_p2p == 0)      begin failures++; $display("PE-to-PE transfer never happened"); end
    checks++; if (n_temporal == 0) begin failures++; $display("temporal accumulation never happened"); end
    checks++; if (n_argmin == 0)   begin failures++; $display("argmin never updated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
