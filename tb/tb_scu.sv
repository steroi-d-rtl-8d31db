// tb_scu: self-checking test of the special compute unit.
// Drives the SCU as a NoC endpoint. Cases, each checked against values worked
// out in the testbench: a cost-volume search (L1 distance of a left feature
// against 8 shifted right features, then min and argmin), an L1 distance
// accumulated over two words, maxpool as the minimum of negated values, a
// tie (first index kept, comparator is strict), plain sum and signed
// difference with the bypasses, and the op latency.
module tb_scu;
  import steroi_pkg::*;
  logic clk = 0, rst_n, pwr_en;
  logic in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  int checks = 0, failures = 0;

  scu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [15:0] vec_t [VEC_N];
  function automatic logic [VEC_W-1:0] pack_v(vec_t a);
    for (int i = 0; i < VEC_N; i++) pack_v[i*16 +: 16] = a[i];
  endfunction
  function automatic longint l1(vec_t a, vec_t b);
    l1 = 0;
    for (int i = 0; i < VEC_N; i++) l1 += (a[i] > b[i]) ? longint'(a[i]) - b[i] : longint'(b[i]) - a[i];
  endfunction

  task automatic send(pkt_t p);
    @(negedge clk);
    in_pkt = p; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask
  task automatic wr(bit sel, int addr, vec_t a);
    send('{dest: dest_t'(1), kind: PKT_WR, sel: sel, addr: ADDR_W'(addr), data: FLIT_W'(pack_v(a))});
  endtask
  task automatic exec(scu_op_t op);
    send('{dest: dest_t'(1), kind: PKT_EXEC, sel: 1'b0, addr: '0, data: FLIT_W'(op)});
  endtask
  task automatic rd(bit sel, int addr, output logic [VEC_W-1:0] d);
    rd_req_t rq;
    rq = '{dest: dest_t'(2), sel: 1'b0, addr: 8'h33};
    send('{dest: dest_t'(1), kind: PKT_RD, sel: sel, addr: ADDR_W'(addr), data: FLIT_W'(rq)});
    while (!(out_valid && out_ready)) @(posedge clk);
    d = out_pkt.data[VEC_W-1:0];
    @(posedge clk);
  endtask
  function automatic scu_op_t mk(int a, int b, bit sub, bit absv, bit neg, bit acc_en, bit acc_clr,
                                 bit min_en, bit min_clr, bit wb, bit wb_min, int wa);
    mk = '{a_addr: ADDR_W'(a), b_addr: ADDR_W'(b), sub: sub, absval: absv, neg: neg, acc_en: acc_en,
           acc_clear: acc_clr, min_en: min_en, min_clear: min_clr, wb: wb, wb_min: wb_min, wb_addr: ADDR_W'(wa)};
  endfunction
  task automatic check(string what, logic [VEC_W-1:0] d, longint val, int idx, bit with_idx);
    checks++;
    if ($signed(d[31:0]) != val || (with_idx && d[47:32] != 16'(idx))) begin
      failures++; $display("%s: got val %0d idx %0d, exp %0d idx %0d", what, $signed(d[31:0]), d[47:32], val, idx);
    end
  endtask

  initial begin
    vec_t left, right [8], a2, b2, z;
    logic [VEC_W-1:0] d;
    longint best; int besti;
    rst_n = 0; pwr_en = 1; in_valid = 0; in_pkt = '0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. cost volume: L1 + min + argmin over 8 candidates
    for (int i = 0; i < VEC_N; i++) left[i] = 16'($signed($urandom % 2000) - 1000);
    for (int dd = 0; dd < 8; dd++) for (int i = 0; i < VEC_N; i++) right[dd][i] = 16'($signed($urandom % 2000) - 1000);
    wr(0, 0, left);
    for (int dd = 0; dd < 8; dd++) wr(1, dd, right[dd]);
    best = 0; besti = 0;
    for (int dd = 0; dd < 8; dd++) if (dd == 0 || l1(left, right[dd]) < best) begin best = l1(left, right[dd]); besti = dd; end
    for (int dd = 0; dd < 8; dd++) begin
      exec(mk(0, dd, 1, 1, 0, 0, 0, 1, dd == 0, dd == 7, 1, 40));
      if (dd == 7) begin
        int busy;
        busy = 0;
        @(negedge clk);
        while (!in_ready) begin busy++; @(negedge clk); end
        checks++;
        if (busy != 4) begin failures++; $display("op with write-back busy %0d cycles, expected 4", busy); end
      end
    end
    rd(1, 40, d);
    check("cost volume argmin", d, best, besti, 1);
    // 2. L1 accumulated over two words
    for (int i = 0; i < VEC_N; i++) begin a2[i] = 16'($signed($urandom % 2000) - 1000); b2[i] = 16'($signed($urandom % 2000) - 1000); end
    wr(0, 1, a2); wr(1, 9, b2);
    exec(mk(0, 0, 1, 1, 0, 1, 1, 0, 0, 0, 0, 0));
    exec(mk(1, 9, 1, 1, 0, 1, 0, 0, 0, 1, 0, 41));
    rd(1, 41, d);
    check("accumulated L1", d, l1(left, right[0]) + l1(a2, b2), 0, 0);
    // 3. maxpool over 6 scalars (lane 0), as min of negated values
    begin
      int vals [6] = '{12, -7, 300, 45, 300, -2};
      for (int n = 0; n < 6; n++) begin
        for (int i = 0; i < VEC_N; i++) z[i] = '0;
        z[0] = 16'(vals[n]);
        wr(0, 10 + n, z);
      end
      for (int n = 0; n < 6; n++) exec(mk(10 + n, 0, 0, 0, 1, 0, 0, 1, n == 0, n == 5, 1, 42));
      rd(1, 42, d);
      check("maxpool (tie keeps first)", d, -300, 2, 1);
    end
    // 4. plain sum (difference and abs bypassed)
    exec(mk(1, 0, 0, 0, 0, 0, 0, 0, 0, 1, 0, 43));
    rd(1, 43, d);
    begin longint s; s = 0; for (int i = 0; i < VEC_N; i++) s += a2[i]; check("sum bypass", d, s, 0, 0); end
    // 5. signed sum of differences (abs bypassed)
    exec(mk(1, 9, 1, 0, 0, 0, 0, 0, 0, 1, 0, 44));
    rd(1, 44, d);
    begin longint s; s = 0; for (int i = 0; i < VEC_N; i++) s += longint'(a2[i]) - b2[i]; check("difference", d, s, 0, 0); end
    // 6. gated unit drains and does not answer
    pwr_en = 0;
    send('{dest: dest_t'(1), kind: PKT_RD, sel: 1'b1, addr: 8'd44, data: '0});
    repeat (8) begin @(posedge clk); checks++; if (out_valid) begin failures++; $display("gated SCU answered"); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
