// dram_io: bridge between the off-chip DRAM and the on-chip network.
//
// The paper keeps large activations in DRAM and either buffers them into local
// SRAM or streams them to where they are needed ("DRAM modes"). This block is
// the mover for both. It takes commands (dma_cmd_t) from the controller:
//   DMA_LOAD   read len consecutive DRAM words from dram_addr and send word k as
//              a PKT_WR multipacket to the destination set pkt.dest, SRAM
//              pkt.sel, address pkt.addr + k. One DRAM read feeds every
//              destination, so a weight or activation shared by several PEs is
//              fetched once.
//   DMA_SEND   inject pkt unchanged (used to start PE/SCU micro-ops and reads).
//   DMA_WBASE  set the DRAM base address for stores.
// Packets arriving from the NoC (PKT_WR addressed to this endpoint) are written
// to DRAM at wbase + {sel, addr}; other kinds are dropped.
//
// DRAM side: valid/ready request (we, addr, wdata) and a response valid with
// data, one response per read, in order. One read is outstanding at a time;
// writes from the NoC use the request port whenever a load is not requesting.
// busy is high while a command is in progress. Command set, handshakes and the
// single outstanding read are this design's choices.
module dram_io
  import steroi_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // commands
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  dma_cmd_t           cmd,
  output logic               busy,
  // NoC link (to / from the west port of tile 0)
  output logic               out_valid,
  input  logic               out_ready,
  output pkt_t               out_pkt,
  input  logic               in_valid,
  output logic               in_ready,
  input  pkt_t               in_pkt,
  // DRAM
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic               dram_req_we,
  output logic [DRAM_AW-1:0] dram_req_addr,
  output logic [FLIT_W-1:0]  dram_req_wdata,
  input  logic               dram_rsp_valid,
  input  logic [FLIT_W-1:0]  dram_rsp_data
);
  typedef enum logic [1:0] {D_IDLE, D_REQ, D_WAIT, D_SEND} state_e;
  state_e             state;
  dma_cmd_t           c;
  logic [ADDR_W:0]    k;
  logic [DRAM_AW-1:0] wbase;
  logic               store;

  assign cmd_ready = (state == D_IDLE) && !out_valid;
  assign busy      = (state != D_IDLE) || out_valid;

  // DRAM request port: load reads first, then stores from the NoC
  assign store          = (state != D_REQ) && in_valid && in_pkt.kind == PKT_WR;
  assign dram_req_valid = (state == D_REQ) || store;
  assign dram_req_we    = (state != D_REQ);
  assign dram_req_addr  = (state == D_REQ) ? c.dram_addr + DRAM_AW'(k)
                                           : wbase + DRAM_AW'({in_pkt.sel, in_pkt.addr});
  assign dram_req_wdata = in_pkt.data;
  assign in_ready       = (state != D_REQ) && (dram_req_ready || in_pkt.kind != PKT_WR);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= D_IDLE;
      c         <= '0;
      k         <= '0;
      wbase     <= '0;
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        D_IDLE: if (cmd_valid && cmd_ready) begin
          c <= cmd;
          k <= '0;
          case (cmd.op)
            DMA_LOAD:  if (cmd.len != '0) state <= D_REQ;
            DMA_SEND:  begin out_pkt <= cmd.pkt; out_valid <= 1'b1; end
            DMA_WBASE: wbase <= cmd.dram_addr;
            default: ;
          endcase
        end
        D_REQ:  if (dram_req_ready) state <= D_WAIT;
        D_WAIT: if (dram_rsp_valid) begin
          out_pkt.dest <= c.pkt.dest;
          out_pkt.kind <= PKT_WR;
          out_pkt.sel  <= c.pkt.sel;
          out_pkt.addr <= c.pkt.addr + ADDR_W'(k);
          out_pkt.data <= dram_rsp_data;
          out_valid    <= 1'b1;
          state        <= D_SEND;
        end
        D_SEND: if (out_ready) begin
          if (k + 1'b1 == c.len) state <= D_IDLE;
          else                   state <= D_REQ;
          k <= k + 1'b1;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_pkt));
endmodule
