// tb_noc_router: self-checking test of the multipacket router.
// Five inputs inject random multipackets (random destination sets, unique id
// in the payload) with random gaps; five outputs accept with random
// backpressure. Every copy that leaves port o must carry exactly
// dest & ROUTE[o]; every port whose route set meets a packet's destinations
// must see that packet exactly once, and no other port may see it. Also
// checks the two-cycle hop latency of an uncontended packet.
module tb_noc_router;
  import steroi_pkg::*;
  localparam int NP = 5;
  localparam int NPKT = 400;
  localparam logic [NP-1:0][NE-1:0] ROUTE = '{
    11'b111_0000_0000, 11'b000_1100_0000, 11'b000_0011_0000, 11'b000_0000_1100, 11'b000_0000_0011};

  logic clk = 0, rst_n;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t [NP-1:0] in_pkt, out_pkt;
  int checks = 0, failures = 0;
  dest_t sent_dest [NP*NPKT];
  logic [NP-1:0] seen [NP*NPKT];
  int n_sent [NP];
  int multicasts = 0;
  bit random_ready = 1;

  noc_router #(.NP(NP), .ROUTE(ROUTE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  for (genvar i = 0; i < NP; i++) begin : g_src
    initial begin
      in_valid[i] = 0; in_pkt[i] = '0; n_sent[i] = 0;
      wait (rst_n);
      while (n_sent[i] < NPKT) begin
        @(negedge clk);
        if (!in_valid[i] && ($urandom % 3 != 0)) begin
          int id;
          id = i * NPKT + n_sent[i];
          in_pkt[i].dest = NE'($urandom) & '1;
          if (in_pkt[i].dest == '0) in_pkt[i].dest = 1;
          in_pkt[i].kind = PKT_WR;
          in_pkt[i].data = FLIT_W'(id);
          in_valid[i] = 1;
        end
        @(posedge clk);
        if (in_valid[i] && in_ready[i]) begin
          int id;
          id = i * NPKT + n_sent[i];
          sent_dest[id] = in_pkt[i].dest;
          seen[id] = '0;
          n_sent[i]++;
          #1 in_valid[i] = 0;
        end
      end
    end
  end

  // sinks
  always @(negedge clk) out_ready = random_ready ? NP'($urandom) : '1;
  always @(posedge clk) if (rst_n && random_ready) begin
    for (int o = 0; o < NP; o++) if (out_valid[o] && out_ready[o]) begin
      int id;
      id = int'(out_pkt[o].data[15:0]);
      checks++;
      if (out_pkt[o].dest !== (sent_dest[id] & ROUTE[o])) begin
        failures++; $display("pkt %0d port %0d dest %b exp %b", id, o, out_pkt[o].dest, sent_dest[id] & ROUTE[o]);
      end
      checks++;
      if (seen[id][o]) begin failures++; $display("pkt %0d twice on port %0d", id, o); end
      seen[id][o] = 1'b1;
    end
  end

  initial begin
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (n_sent[0] == NPKT && n_sent[1] == NPKT && n_sent[2] == NPKT &&
          n_sent[3] == NPKT && n_sent[4] == NPKT);
    repeat (100) @(negedge clk);
    for (int id = 0; id < NP*NPKT; id++) begin
      logic [NP-1:0] exp;
      for (int o = 0; o < NP; o++) exp[o] = |(sent_dest[id] & ROUTE[o]);
      if ($countones(exp) > 1) multicasts++;
      checks++;
      if (seen[id] !== exp) begin failures++; $display("pkt %0d seen %b exp %b", id, seen[id], exp); end
    end
    checks++;
    if (multicasts == 0) begin failures++; $display("no multicast exercised"); end
    // latency of a lone packet: accepted at edge k, visible on the output after edge k+2
    random_ready = 0;
    repeat (5) @(negedge clk);
    begin
      int t0, t1;
      force in_valid = 5'b00001;
      force in_pkt[0] = '{dest: 11'b000_0000_0100, kind: PKT_WR, sel: 1'b0, addr: '0, data: '0};
      @(posedge clk); t0 = $time;
      #1 release in_valid; release in_pkt[0]; in_valid = '0;
      while (!out_valid[1]) @(posedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != 2) begin failures++; $display("hop latency %0d cycles", (t1 - t0) / 10); end
    end
    $display("multicast packets: %0d of %0d", multicasts, NP*NPKT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
