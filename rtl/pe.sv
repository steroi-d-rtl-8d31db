// pe: processing element of a tile.
//
// Datapath (as drawn in the paper's PE diagram): a Vector SRAM feeds a vector
// buffer; a Matrix SRAM feeds either a matrix buffer or the shuffle buffer
// (depthwise kernels); a mux picks one of the two as the matrix input of the
// VMM; the VMM output goes into a per-lane accumulator, and the accumulator
// returns to the Matrix SRAM. The paper says PEs run convolutions and
// activation functions; here the write-back applies an optional ReLU and an
// arithmetic right shift with saturation to DATA_W (this design's choice).
//
// Dataflows: the vector and matrix buffers are only reloaded when the micro-op
// asks (load_vec, load_mat). Keeping the matrix buffer while new vectors stream
// in is weight-stationary; keeping the vector buffer while new matrices stream
// in is input-stationary. acc_clear/wb let input channels be accumulated over
// time in one PE; partial sums can instead be written back and read out over
// the NoC for accumulation elsewhere.
//
// Interface: one NoC endpoint (valid/ready in and out) taking three packets:
//   PKT_WR   write data to Vector SRAM (sel=0, low VEC_N words) or Matrix SRAM
//            (sel=1) at addr; one cycle.
//   PKT_RD   read SRAM[sel] at addr and send it as a PKT_WR to the rd_req_t in
//            the payload (a destination set, so results can be multicast).
//   PKT_EXEC run one pe_op_t: cycle 1 reads both SRAMs, cycle 2 loads the
//            buffers, cycle 3 multiplies and accumulates, cycle 4 (if wb)
//            writes back. A new packet is accepted the cycle after.
// pwr_en=0 models a power-gated PE: the logic is held in reset and incoming
// packets are drained and dropped. The micro-op format, timing and packet
// handling are this design's own.
module pe
  import steroi_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic pwr_en,
  input  logic in_valid,
  output logic in_ready,
  input  pkt_t in_pkt,
  output logic out_valid,
  input  logic out_ready,
  output pkt_t out_pkt
);
  typedef enum logic [2:0] {S_IDLE, S_RDWAIT, S_LOAD, S_MAC, S_WB, S_SEND} state_e;
  state_e  state;
  logic    rst_i;
  pe_op_t  op;
  rd_req_t rq;
  logic    rq_sel;

  pe_op_t  in_op;

  assign rst_i = rst_n & pwr_en;
  assign in_op = pe_op_t'(in_pkt.data[$bits(pe_op_t)-1:0]);

  // ------------------------------------------------------------- memories
  logic              v_en, v_we, m_en, m_we;
  logic [ADDR_W-1:0] v_addr, m_addr;
  logic [VEC_W-1:0]  v_wdata, v_rdata;
  logic [MAT_W-1:0]  m_wdata, m_rdata;

  sram_sp #(.DEPTH(SRAM_DEPTH), .WIDTH(VEC_W)) u_vsram (
    .clk, .en(v_en), .we(v_we), .addr(v_addr), .wdata(v_wdata), .rdata(v_rdata));
  sram_sp #(.DEPTH(SRAM_DEPTH), .WIDTH(MAT_W)) u_msram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata));

  // ------------------------------------------------------------- datapath
  logic [VEC_W-1:0]         vbuf;
  logic [MAT_W-1:0]         mbuf, sh_w, vmm_w;
  logic [MAT_M*ACC_W-1:0]   vmm_y, acc;
  logic [MAT_M*DATA_W-1:0]  wb_word;

  shuffle_buffer #(.VEC_N(VEC_N), .MAT_M(MAT_M), .DATA_W(DATA_W)) u_shuf (
    .clk, .rst_n(rst_i),
    .load(state == S_LOAD && op.load_mat && op.depthwise),
    .kvec(m_rdata[VEC_W-1:0]), .lane_off(op.lane_off), .w(sh_w));

  assign vmm_w = op.depthwise ? sh_w : mbuf;

  vmm #(.VEC_N(VEC_N), .MAT_M(MAT_M), .DATA_W(DATA_W), .OUT_W(ACC_W)) u_vmm (
    .x(vbuf), .w(vmm_w), .y(vmm_y));

  accum #(.LANES(MAT_M), .IN_W(ACC_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n(rst_i), .en(state == S_MAC), .clear(op.acc_clear),
    .din(vmm_y), .acc(acc));

  // activation + requantisation of the accumulator
  always_comb begin
    for (int j = 0; j < MAT_M; j++) begin
      logic signed [ACC_W-1:0] v;
      v = $signed(acc[j*ACC_W +: ACC_W]) >>> op.shift;
      if (op.relu && v < 0) v = '0;
      if (v > ACC_W'(32767))       wb_word[j*DATA_W +: DATA_W] = 16'sh7fff;
      else if (v < -ACC_W'(32768)) wb_word[j*DATA_W +: DATA_W] = 16'sh8000;
      else                         wb_word[j*DATA_W +: DATA_W] = v[DATA_W-1:0];
    end
  end

  // ------------------------------------------------------- SRAM port control
  always_comb begin
    v_en = 1'b0; v_we = 1'b0; v_addr = in_pkt.addr; v_wdata = in_pkt.data[VEC_W-1:0];
    m_en = 1'b0; m_we = 1'b0; m_addr = in_pkt.addr; m_wdata = in_pkt.data[MAT_W-1:0];
    if (state == S_IDLE && in_valid) begin
      case (in_pkt.kind)
        PKT_WR: begin
          if (in_pkt.sel) begin m_en = 1'b1; m_we = 1'b1; end
          else            begin v_en = 1'b1; v_we = 1'b1; end
        end
        PKT_RD: begin
          if (in_pkt.sel) m_en = 1'b1;
          else            v_en = 1'b1;
        end
        PKT_EXEC: begin
          v_en = 1'b1; v_addr = in_op.vec_addr;
          m_en = 1'b1; m_addr = in_op.mat_addr;
        end
        default: ;
      endcase
    end else if (state == S_WB) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = op.wb_addr;
      m_wdata = MAT_W'(wb_word);
    end
  end

  assign in_ready = (state == S_IDLE) || !pwr_en;

  // ------------------------------------------------------------------- FSM
  always_ff @(posedge clk) begin
    if (!rst_i) begin
      state     <= S_IDLE;
      op        <= '0;
      rq        <= '0;
      rq_sel    <= 1'b0;
      vbuf      <= '0;
      mbuf      <= '0;
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          case (in_pkt.kind)
            PKT_RD: begin
              rq     <= rd_req_t'(in_pkt.data[RD_REQ_W-1:0]);
              rq_sel <= in_pkt.sel;
              state  <= S_RDWAIT;
            end
            PKT_EXEC: begin
              op    <= in_op;
              state <= S_LOAD;
            end
            default: ;
          endcase
        end
        S_RDWAIT: begin
          out_pkt.dest <= rq.dest;
          out_pkt.kind <= PKT_WR;
          out_pkt.sel  <= rq.sel;
          out_pkt.addr <= rq.addr;
          out_pkt.data <= rq_sel ? FLIT_W'(m_rdata) : FLIT_W'(v_rdata);
          out_valid    <= 1'b1;
          state        <= S_SEND;
        end
        S_LOAD: begin
          if (op.load_vec) vbuf <= v_rdata;
          if (op.load_mat && !op.depthwise) mbuf <= m_rdata;
          state <= S_MAC;
        end
        S_MAC:  state <= op.wb ? S_WB : S_IDLE;
        S_WB:   state <= S_IDLE;
        S_SEND: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
