// scu: special compute unit, one per tile.
//
// Runs the non-parameterised operations of stereo-depth networks that a VMM
// handles badly: cost-volume matching (vector difference, L1 norm), sequence
// minimum and argmin, and their compositions. The pipeline follows the paper's
// SCU diagram: SRAM 0 and SRAM 1 each feed a vector buffer; a Diff + L1-norm
// stage reduces the two vectors to one number; an accumulator sums such numbers
// over several words; a Min + Argmin stage (a "<" comparator with a min
// register and an argmin register) tracks the smallest value in a sequence and
// its position; results return to SRAM 1.
//
// Each stage has a bypass, chosen per micro-op (scu_op_t):
//   sub=0     d = a (single operand), else d = a - b        (lane-wise)
//   absval=0  r = sum d, else r = sum |d|                    (L1 norm)
//   neg=1     r = -r  (a maximum is the minimum of negated values, as for maxpool)
//   acc_en=0  v = r, else v = accumulated r (acc_clear starts a new sum)
//   min_en=1  if min_clear or v < min: min = v, argmin = index; the index counts
//             min_en ops since the last min_clear (the first is index 0)
//   wb=1      write SRAM 1 word wb_addr: bits [31:0] = min (wb_min=1) or v,
//             bits [47:32] = argmin when wb_min=1, other bits zero.
// The paper gives the stages and the bypass idea; the encoding, the negation and
// the index counter are this design's choices.
//
// Interface and timing: same NoC endpoint protocol as the PE (PKT_WR to SRAM
// sel, PKT_RD answered with a PKT_WR, PKT_EXEC runs one op). An op takes four
// cycles (read SRAMs, load buffers, reduce/accumulate, min/argmin) plus one for
// write-back. pwr_en=0 holds the unit in reset and drops incoming packets.
module scu
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
  typedef enum logic [2:0] {S_IDLE, S_RDWAIT, S_LOAD, S_RED, S_MIN, S_WB, S_SEND} state_e;
  state_e  state;
  logic    rst_i;
  scu_op_t op, in_op;
  rd_req_t rq;
  logic    rq_sel;

  assign rst_i = rst_n & pwr_en;
  assign in_op = scu_op_t'(in_pkt.data[$bits(scu_op_t)-1:0]);

  // ------------------------------------------------------------- memories
  logic              s0_en, s0_we, s1_en, s1_we;
  logic [ADDR_W-1:0] s0_addr, s1_addr;
  logic [VEC_W-1:0]  s0_wdata, s1_wdata, s0_rdata, s1_rdata;

  sram_sp #(.DEPTH(SRAM_DEPTH), .WIDTH(VEC_W)) u_sram0 (
    .clk, .en(s0_en), .we(s0_we), .addr(s0_addr), .wdata(s0_wdata), .rdata(s0_rdata));
  sram_sp #(.DEPTH(SRAM_DEPTH), .WIDTH(VEC_W)) u_sram1 (
    .clk, .en(s1_en), .we(s1_we), .addr(s1_addr), .wdata(s1_wdata), .rdata(s1_rdata));

  // ------------------------------------------------------------- datapath
  logic [VEC_W-1:0]        abuf, bbuf;
  logic signed [ACC_W-1:0] red, red_q, acc, val;
  logic signed [ACC_W-1:0] minv;
  logic [15:0]             argmin, idx;

  // Diff + L1 norm
  always_comb begin
    red = '0;
    for (int l = 0; l < VEC_N; l++) begin
      logic signed [ACC_W-1:0] a, b, d;
      a = ACC_W'($signed(abuf[l*DATA_W +: DATA_W]));
      b = ACC_W'($signed(bbuf[l*DATA_W +: DATA_W]));
      d = op.sub ? a - b : a;
      if (op.absval && d < 0) d = -d;
      red += d;
    end
    if (op.neg) red = -red;
  end

  accum #(.LANES(1), .IN_W(ACC_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n(rst_i), .en(state == S_RED && op.acc_en), .clear(op.acc_clear),
    .din(red), .acc(acc));

  assign val = op.acc_en ? acc : red_q;

  // ------------------------------------------------------- SRAM port control
  always_comb begin
    s0_en = 1'b0; s0_we = 1'b0; s0_addr = in_pkt.addr; s0_wdata = in_pkt.data[VEC_W-1:0];
    s1_en = 1'b0; s1_we = 1'b0; s1_addr = in_pkt.addr; s1_wdata = in_pkt.data[VEC_W-1:0];
    if (state == S_IDLE && in_valid) begin
      case (in_pkt.kind)
        PKT_WR: begin
          if (in_pkt.sel) begin s1_en = 1'b1; s1_we = 1'b1; end
          else            begin s0_en = 1'b1; s0_we = 1'b1; end
        end
        PKT_RD: begin
          if (in_pkt.sel) s1_en = 1'b1;
          else            s0_en = 1'b1;
        end
        PKT_EXEC: begin
          s0_en = 1'b1; s0_addr = in_op.a_addr;
          s1_en = 1'b1; s1_addr = in_op.b_addr;
        end
        default: ;
      endcase
    end else if (state == S_WB) begin
      s1_en = 1'b1; s1_we = 1'b1; s1_addr = op.wb_addr;
      s1_wdata = op.wb_min ? VEC_W'({argmin, minv[31:0]}) : VEC_W'(val[31:0]);
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
      abuf      <= '0;
      bbuf      <= '0;
      red_q     <= '0;
      minv      <= '0;
      argmin    <= '0;
      idx       <= '0;
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
          out_pkt.data <= FLIT_W'(rq_sel ? s1_rdata : s0_rdata);
          out_valid    <= 1'b1;
          state        <= S_SEND;
        end
        S_LOAD: begin
          abuf  <= s0_rdata;
          bbuf  <= s1_rdata;
          state <= S_RED;
        end
        S_RED: begin
          red_q <= red;
          state <= S_MIN;
        end
        S_MIN: begin
          if (op.min_en) begin
            if (op.min_clear || val < minv) begin
              minv   <= val;
              argmin <= op.min_clear ? 16'd0 : idx;
            end
            idx <= op.min_clear ? 16'd1 : idx + 16'd1;
          end
          state <= op.wb ? S_WB : S_IDLE;
        end
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
