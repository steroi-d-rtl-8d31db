// tb_tile: self-checking test of one tile (tile 0 of the row).
// Packets enter on the west link as they would from the DRAM I/O. Checks: one
// multicast write delivers a matrix to all four PEs; each PE gets its own
// vector; one multicast micro-op starts all four PEs; read requests return
// each PE's product to the DRAM endpoint out of the west link with the right
// values; a packet for the next tile leaves on the east link carrying only
// that tile's destinations, while its local part is still delivered; a packet
// entering from the east reaches a PE; the SCU computes an L1 distance; a
// power-gated PE drops its packets while the others answer.
module tb_tile;
  import steroi_pkg::*;
  logic clk = 0, rst_n;
  logic [N_PE-1:0] pe_pwr_en;
  logic scu_pwr_en;
  logic e_in_valid, e_in_ready, e_out_valid, e_out_ready;
  logic w_in_valid, w_in_ready, w_out_valid, w_out_ready;
  pkt_t e_in_pkt, e_out_pkt, w_in_pkt, w_out_pkt;
  int checks = 0, failures = 0;
  pkt_t west_q [$], east_q [$];

  tile #(.TILE_ID(0)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin w_out_ready = ($urandom % 4 != 0); e_out_ready = ($urandom % 4 != 0); end
  always @(posedge clk) if (rst_n) begin
    if (w_out_valid && w_out_ready) west_q.push_back(w_out_pkt);
    if (e_out_valid && e_out_ready) east_q.push_back(e_out_pkt);
  end

  task automatic send_w(pkt_t p);
    @(negedge clk); w_in_pkt = p; w_in_valid = 1;
    @(posedge clk); while (!w_in_ready) @(posedge clk);
    #1 w_in_valid = 0;
  endtask
  task automatic send_e(pkt_t p);
    @(negedge clk); e_in_pkt = p; e_in_valid = 1;
    @(posedge clk); while (!e_in_ready) @(posedge clk);
    #1 e_in_valid = 0;
  endtask

  typedef logic signed [15:0] vec_t [VEC_N];
  function automatic logic [VEC_W-1:0] pack_v(vec_t a);
    for (int i = 0; i < VEC_N; i++) pack_v[i*16 +: 16] = a[i];
  endfunction

  function automatic rd_req_t mkrq(dest_t d, logic [7:0] a);
    mkrq = '{dest: d, sel: 1'b0, addr: a};
  endfunction

  initial begin
    logic signed [15:0] w [VEC_N][MAT_M];
    logic [MAT_W-1:0] wm;
    vec_t v [N_PE];
    pe_op_t op;
    scu_op_t sop;
    dest_t all_pe = dest_t'(4'hf);
    dest_t to_dram = dest_t'(1) << DRAM_EP;
    rst_n = 0; pe_pwr_en = '1; scu_pwr_en = 1; w_in_valid = 0; e_in_valid = 0; w_in_pkt = '0; e_in_pkt = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < VEC_N; i++) for (int j = 0; j < MAT_M; j++) begin
      w[i][j] = 16'($signed($urandom % 64) - 32);
      wm[(i*MAT_M+j)*16 +: 16] = w[i][j];
    end
    send_w('{dest: all_pe, kind: PKT_WR, sel: 1'b1, addr: 8'd0, data: wm});
    for (int p = 0; p < N_PE; p++) begin
      for (int i = 0; i < VEC_N; i++) v[p][i] = 16'($signed($urandom % 64) - 32);
      if (p == 3)  // PE 3 gets its vector from the east side
        send_e('{dest: dest_t'(1) << 3, kind: PKT_WR, sel: 1'b0, addr: 8'd0, data: FLIT_W'(pack_v(v[p]))});
      else
        send_w('{dest: dest_t'(1) << p, kind: PKT_WR, sel: 1'b0, addr: 8'd0, data: FLIT_W'(pack_v(v[p]))});
    end
    op = '{vec_addr: 8'd0, mat_addr: 8'd0, load_vec: 1'b1, load_mat: 1'b1, depthwise: 1'b0, lane_off: 2'd0,
           acc_clear: 1'b1, wb: 1'b1, wb_addr: 8'd5, relu: 1'b0, shift: 5'd0};
    send_w('{dest: all_pe, kind: PKT_EXEC, sel: 1'b0, addr: 8'd0, data: FLIT_W'(op)});
    for (int p = 0; p < N_PE; p++) begin
      rd_req_t rq;
      rq = '{dest: to_dram, sel: 1'b0, addr: 8'(p)};
      send_w('{dest: dest_t'(1) << p, kind: PKT_RD, sel: 1'b1, addr: 8'd5, data: FLIT_W'(rq)});
    end
    // split packet: PE 1 of this tile and PE 0 + SCU of the next tile
    send_w('{dest: dest_t'(11'b011_0000_0010), kind: PKT_WR, sel: 1'b0, addr: 8'd9, data: FLIT_W'(64'h1234)});
    // SCU: L1 distance of two vectors
    send_w('{dest: dest_t'(1) << 4, kind: PKT_WR, sel: 1'b0, addr: 8'd0, data: FLIT_W'(pack_v(v[0]))});
    send_w('{dest: dest_t'(1) << 4, kind: PKT_WR, sel: 1'b1, addr: 8'd0, data: FLIT_W'(pack_v(v[1]))});
    sop = '{a_addr: 8'd0, b_addr: 8'd0, sub: 1'b1, absval: 1'b1, neg: 1'b0, acc_en: 1'b0, acc_clear: 1'b0,
            min_en: 1'b0, min_clear: 1'b0, wb: 1'b1, wb_min: 1'b0, wb_addr: 8'd3};
    send_w('{dest: dest_t'(1) << 4, kind: PKT_EXEC, sel: 1'b0, addr: 8'd0, data: FLIT_W'(sop)});
    send_w('{dest: dest_t'(1) << 4, kind: PKT_RD, sel: 1'b1, addr: 8'd3,
             data: FLIT_W'(mkrq(to_dram, 8'd100))});
    // read back the split packet's local copy
    send_w('{dest: dest_t'(1) << 1, kind: PKT_RD, sel: 1'b0, addr: 8'd9,
             data: FLIT_W'(mkrq(to_dram, 8'd101))});
    repeat (100) @(negedge clk);
    // PE results
    checks++;
    if (west_q.size() != N_PE + 2) begin failures++; $display("%0d packets out west, exp %0d", west_q.size(), N_PE + 2); end
    foreach (west_q[n]) begin
      pkt_t p;
      p = west_q[n];
      checks++;
      if (p.dest !== to_dram) begin failures++; $display("west packet dest %b", p.dest); end
      if (p.addr < N_PE) begin
        for (int j = 0; j < MAT_M; j++) begin
          longint e;
          e = 0;
          for (int i = 0; i < VEC_N; i++) e += longint'(v[p.addr][i]) * w[i][j];
          checks++;
          if ($signed(p.data[j*16 +: 16]) != e) begin failures++; $display("PE %0d col %0d got %0d exp %0d", p.addr, j, $signed(p.data[j*16 +: 16]), e); end
        end
      end else if (p.addr == 100) begin
        longint e;
          e = 0;
        for (int i = 0; i < VEC_N; i++) e += (v[0][i] > v[1][i]) ? longint'(v[0][i]) - v[1][i] : longint'(v[1][i]) - v[0][i];
        checks++;
        if ($signed(p.data[31:0]) != e) begin failures++; $display("SCU L1 got %0d exp %0d", $signed(p.data[31:0]), e); end
      end else begin
        checks++;
        if (p.data[63:0] !== 64'h1234) begin failures++; $display("split local copy wrong"); end
      end
    end
    checks++;
    if (east_q.size() != 1 || east_q[0].dest !== dest_t'(11'b011_0000_0000)) begin
      failures++; $display("east packets %0d", east_q.size());
    end
    // power gating: PE 2 off, a read to PEs 1 and 2 gets one answer
    west_q.delete();
    pe_pwr_en = 4'b1011;
    send_w('{dest: dest_t'(4'b0110), kind: PKT_RD, sel: 1'b1, addr: 8'd5,
             data: FLIT_W'(mkrq(to_dram, 8'd7))});
    repeat (60) @(negedge clk);
    checks++;
    if (west_q.size() != 1) begin failures++; $display("gated: %0d answers", west_q.size()); end
    // PEs 2 and 3 off: a read to PEs 0, 1 and 3 gets two answers
    west_q.delete();
    pe_pwr_en = 4'b0011;
    send_w('{dest: dest_t'(4'b1011), kind: PKT_RD, sel: 1'b1, addr: 8'd5,
             data: FLIT_W'(mkrq(to_dram, 8'd7))});
    repeat (60) @(negedge clk);
    checks++;
    if (west_q.size() != 2) begin failures++; $display("gated: %0d answers, exp 2", west_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
