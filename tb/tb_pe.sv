// tb_pe: self-checking test of the processing element as a NoC endpoint.
// Loads vectors and matrices with write packets, runs micro-ops and reads the
// results back with read packets, comparing against products worked out in
// the testbench. Covers: dense VMM, weight-stationary reuse (matrix buffer
// kept), input-stationary reuse (vector buffer kept), accumulation over two
// ops, depthwise via the shuffle buffer, ReLU/shift/saturation on write-back,
// the four-cycle op latency, read replies to a multicast set, and a
// power-gated PE that drains packets without answering.
module tb_pe;
  import steroi_pkg::*;
  logic clk = 0, rst_n, pwr_en;
  logic in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  int checks = 0, failures = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [15:0] vec_t [VEC_N];
  typedef logic signed [15:0] mat_t [VEC_N][MAT_M];
  vec_t v[2];
  mat_t w[2];
  vec_t k;

  function automatic logic [VEC_W-1:0] pack_v(vec_t a);
    for (int i = 0; i < VEC_N; i++) pack_v[i*16 +: 16] = a[i];
  endfunction
  function automatic logic [MAT_W-1:0] pack_m(mat_t a);
    for (int i = 0; i < VEC_N; i++) for (int j = 0; j < MAT_M; j++) pack_m[(i*MAT_M+j)*16 +: 16] = a[i][j];
  endfunction
  function automatic longint dot(vec_t a, mat_t b, int j);
    dot = 0;
    for (int i = 0; i < VEC_N; i++) dot += longint'(a[i]) * longint'(b[i][j]);
  endfunction
  function automatic logic [15:0] requant(longint a, int sh, bit relu);
    longint r;
    r = a >>> sh;
    if (relu && r < 0) r = 0;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r[15:0];
  endfunction

  task automatic send(pkt_t p);
    @(negedge clk);
    in_pkt = p; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask
  task automatic wr(bit sel, int addr, logic [FLIT_W-1:0] d);
    send('{dest: dest_t'(1), kind: PKT_WR, sel: sel, addr: ADDR_W'(addr), data: d});
  endtask
  task automatic exec(pe_op_t op);
    send('{dest: dest_t'(1), kind: PKT_EXEC, sel: 1'b0, addr: '0, data: FLIT_W'(op)});
  endtask
  // read SRAM[sel][addr], expect a reply addressed to rdest, return its data
  task automatic rd(bit sel, int addr, dest_t rdest, output logic [FLIT_W-1:0] d);
    rd_req_t rq;
    rq = '{dest: rdest, sel: 1'b1, addr: 8'h5a};
    send('{dest: dest_t'(1), kind: PKT_RD, sel: sel, addr: ADDR_W'(addr), data: FLIT_W'(rq)});
    while (!(out_valid && out_ready)) @(posedge clk);
    d = out_pkt.data;
    checks++;
    if (out_pkt.dest !== rdest || out_pkt.kind !== PKT_WR || out_pkt.addr !== 8'h5a || out_pkt.sel !== 1'b1) begin
      failures++; $display("bad reply header");
    end
    @(posedge clk);
  endtask
  task automatic expect_out(string what, logic [FLIT_W-1:0] d, logic [MAT_M*16-1:0] e);
    checks++;
    if (d[MAT_M*16-1:0] !== e) begin failures++; $display("%s: got %h exp %h", what, d[MAT_M*16-1:0], e); end
  endtask

  function automatic pe_op_t mk(int va, int ma, bit lv, bit lm, bit dw, int off, bit clr, bit wb, int wa, bit relu, int sh);
    mk = '{vec_addr: ADDR_W'(va), mat_addr: ADDR_W'(ma), load_vec: lv, load_mat: lm, depthwise: dw,
           lane_off: 2'(off), acc_clear: clr, wb: wb, wb_addr: ADDR_W'(wa), relu: relu, shift: 5'(sh)};
  endfunction

  initial begin
    logic [FLIT_W-1:0] d;
    logic [MAT_M*16-1:0] e;
    rst_n = 0; pwr_en = 1; in_valid = 0; in_pkt = '0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < VEC_N; i++) v[t][i] = 16'($signed(($urandom % 200)) - 100);
      for (int i = 0; i < VEC_N; i++) for (int j = 0; j < MAT_M; j++) w[t][i][j] = 16'($signed(($urandom % 200)) - 100);
    end
    for (int i = 0; i < VEC_N; i++) k[i] = 16'($signed(($urandom % 200)) - 100);
    wr(0, 0, FLIT_W'(pack_v(v[0])));
    wr(0, 1, FLIT_W'(pack_v(v[1])));
    wr(1, 0, pack_m(w[0]));
    wr(1, 1, pack_m(w[1]));
    wr(1, 2, FLIT_W'(pack_v(k)));
    // SRAM write/read back
    rd(0, 1, dest_t'(11'b100_0000_0110), d);
    checks++; if (d[VEC_W-1:0] !== pack_v(v[1])) begin failures++; $display("vector SRAM readback"); end
    // 1. dense, with latency check
    begin
      int busy;
      exec(mk(0, 0, 1, 1, 0, 0, 1, 1, 10, 0, 0));
      busy = 0;
      @(negedge clk);
      while (!in_ready) begin busy++; @(negedge clk); end
      checks++;
      if (busy != 3) begin failures++; $display("op busy for %0d cycles, expected 3", busy); end
    end
    rd(1, 10, dest_t'(1), d);
    for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(v[0], w[0], j), 0, 0);
    expect_out("dense", d, e);
    // 2. weight stationary: new vector, matrix buffer kept (mat_addr 1 ignored)
    exec(mk(1, 1, 1, 0, 0, 0, 1, 1, 11, 0, 0));
    rd(1, 11, dest_t'(1), d);
    for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(v[1], w[0], j), 0, 0);
    expect_out("weight stationary", d, e);
    // 3. input stationary: vector buffer kept (v[1]), new matrix w[1]
    exec(mk(0, 1, 0, 1, 0, 0, 1, 1, 12, 0, 0));
    rd(1, 12, dest_t'(1), d);
    for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(v[1], w[1], j), 0, 0);
    expect_out("input stationary", d, e);
    // 4. accumulation over two ops: v0*w1 + v1*w0
    exec(mk(0, 1, 1, 1, 0, 0, 1, 0, 0, 0, 0));
    exec(mk(1, 0, 1, 1, 0, 0, 0, 1, 13, 0, 0));
    rd(1, 13, dest_t'(1), d);
    for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(v[0], w[1], j) + dot(v[1], w[0], j), 0, 0);
    expect_out("accumulate", d, e);
    // 5. depthwise through the shuffle buffer, lane offset 1
    exec(mk(0, 2, 1, 1, 1, 1, 1, 1, 14, 0, 0));
    rd(1, 14, dest_t'(1), d);
    e = '0;
    for (int i = 0; i < VEC_N; i++) e[((i+1)%MAT_M)*16 +: 16] = requant(longint'(v[0][i]) * longint'(k[i]), 0, 0);
    expect_out("depthwise", d, e);
    // 6. ReLU, shift and saturation
    begin
      vec_t vb; mat_t wb;
      for (int i = 0; i < VEC_N; i++) vb[i] = 16'sd30000;
      for (int i = 0; i < VEC_N; i++) for (int j = 0; j < MAT_M; j++) wb[i][j] = (j == 0) ? 16'sd30000 : (j == 1) ? -16'sd5 : (j == 2) ? 16'sd3 : -16'sd30000;
      wr(0, 3, FLIT_W'(pack_v(vb)));
      wr(1, 3, pack_m(wb));
      exec(mk(3, 3, 1, 1, 0, 0, 1, 1, 15, 1, 2));
      rd(1, 15, dest_t'(1), d);
      for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(vb, wb, j), 2, 1);
      expect_out("relu/shift/saturate", d, e);
      exec(mk(3, 3, 1, 1, 0, 0, 1, 1, 16, 0, 0));
      rd(1, 16, dest_t'(1), d);
      for (int j = 0; j < MAT_M; j++) e[j*16 +: 16] = requant(dot(vb, wb, j), 0, 0);
      expect_out("saturate no relu", d, e);
    end
    // 7. power gated: packets are drained, no reply
    pwr_en = 0;
    begin
      rd_req_t rq;
      rq = '{dest: dest_t'(1), sel: 1'b0, addr: '0};
      send('{dest: dest_t'(1), kind: PKT_RD, sel: 1'b1, addr: 8'd10, data: FLIT_W'(rq)});
      repeat (10) begin
        @(posedge clk);
        checks++;
        if (out_valid) begin failures++; $display("gated PE answered"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
