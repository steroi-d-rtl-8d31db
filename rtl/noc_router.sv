// noc_router: multipacket router with dimension-order routing.
//
// A multipacket is one data word plus the set of endpoints that must receive
// it (a bit mask, dest). ROUTE[p] is the set of endpoints that lie behind
// output port p under dimension-order routing; the sets of the ports are
// disjoint. A packet waiting at an input is copied to every port p with
// (dest & ROUTE[p]) != 0, and the copy on port p carries only dest & ROUTE[p].
// So each endpoint is reached by exactly one path and a link carries a given
// word at most once, which is what saves NoC traffic over sending one unicast
// per destination.
//
// Microarchitecture (this design's own; the paper gives only the routing idea):
// single-flit packets; each input has a one-entry buffer (in_ready = buffer
// empty); each output has a one-entry register and a round-robin arbiter over
// the inputs that still owe it a copy. Copies to different ports leave
// independently; the input buffer frees when its last copy has left.
// Links use valid/ready: a word moves on a cycle where both are high.
// Latency: two cycles per hop with no contention.
module noc_router
  import steroi_pkg::*;
#(
  parameter int                       NP    = 5,
  parameter logic [NP-1:0][NE-1:0]    ROUTE = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NP-1:0]     in_valid,
  output logic [NP-1:0]     in_ready,
  input  pkt_t [NP-1:0]     in_pkt,
  output logic [NP-1:0]     out_valid,
  input  logic [NP-1:0]     out_ready,
  output pkt_t [NP-1:0]     out_pkt
);
  pkt_t  [NP-1:0]         buf_pkt;
  logic  [NP-1:0]         buf_v;
  logic  [NP-1:0][NP-1:0] pend;     // pend[i][o]: input i owes a copy to output o
  logic  [NP-1:0][NP-1:0] grant;    // grant[o][i]
  logic  [NP-1:0]         out_take; // output o loads a new word this cycle
  logic  [NP-1:0][$clog2(NP)-1:0] rr;

  assign in_ready = ~buf_v;

  // arbitration per output, round-robin from rr[o]
  always_comb begin
    grant    = '0;
    out_take = '0;
    for (int o = 0; o < NP; o++) begin
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < NP; k++) begin
          if (!out_take[o] && buf_v[(int'(rr[o]) + k) % NP] &&
              pend[(int'(rr[o]) + k) % NP][o]) begin
            grant[o][(int'(rr[o]) + k) % NP] = 1'b1;
            out_take[o] = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buf_v     <= '0;
      pend      <= '0;
      out_valid <= '0;
      rr        <= '0;
      buf_pkt   <= '0;
      out_pkt   <= '0;
    end else begin
      // outputs
      for (int o = 0; o < NP; o++) begin
        if (out_take[o]) begin
          for (int i = 0; i < NP; i++) begin
            if (grant[o][i]) begin
              out_pkt[o]      <= buf_pkt[i];
              out_pkt[o].dest <= buf_pkt[i].dest & ROUTE[o];
              rr[o]           <= ($clog2(NP))'((i + 1) % NP);
            end
          end
          out_valid[o] <= 1'b1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
      // inputs
      for (int i = 0; i < NP; i++) begin
        if (buf_v[i]) begin
          logic [NP-1:0] left;
          for (int o = 0; o < NP; o++) left[o] = pend[i][o] & ~grant[o][i];
          pend[i] <= left;
          if (left == '0) buf_v[i] <= 1'b0;
        end else if (in_valid[i]) begin
          buf_v[i]   <= 1'b1;
          buf_pkt[i] <= in_pkt[i];
          for (int o = 0; o < NP; o++) pend[i][o] <= |(in_pkt[i].dest & ROUTE[o]);
        end
      end
    end
  end

  // The route sets must not overlap, or an endpoint would get two copies.
  initial begin
    for (int a = 0; a < NP; a++)
      for (int b = a + 1; b < NP; b++)
        assert ((ROUTE[a] & ROUTE[b]) == '0)
          else $error("noc_router: ports %0d and %0d share destinations", a, b);
  end

  // Valid/ready rule: a word offered on an output stays until taken.
  for (genvar o = 0; o < NP; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_pkt[o]));
  end
endmodule
