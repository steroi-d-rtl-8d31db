// controller: binned-mapping controller of the L2 processor.
//
// The paper's mapping splits the range of ROI sizes into a few bins and stores
// one high-level mapping descriptor per bin, found offline; the per-frame,
// ROI-specific low-level mapping is derived at run time. This block holds:
//   * NBINS-1 ascending bin boundaries (ROI size in pixels); an ROI of size s
//     falls in bin = number of boundaries b with s >= b;
//   * one descriptor per bin (desc_t): which tiles, PEs and SCUs are powered
//     for the frame (tile shutoff), the DRAM mode tag, and where the bin's
//     command program starts;
//   * a program memory of prog_ins_t entries shared by all bins.
// On start it latches roi_size, picks the bin, drives the power enables and
// runs the program from prog_base: CI_DMA hands a command to the DRAM I/O,
// CI_WAIT waits for the DRAM I/O to be idle and then cnt cycles, CI_LOOP/CI_ENDL
// repeat the body ceil(roi_size / 2^cnt) times with the DRAM address of each
// DMA_LOAD and DMA_WBASE advanced by iteration*step (this is where the ROI size shapes the low-level
// mapping), and CI_END raises done for one cycle.
//
// Interface: a configuration write port (cfg_*) fills the tables; start/roi_size
// begin a frame; busy, done, bin report progress. The binning idea and tile
// shutoff follow the paper; table formats, the instruction set and the loop
// rule are this design's choices. Power enables reset to off.
module controller
  import steroi_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_valid,
  input  cfg_sel_e                  cfg_sel,
  input  logic [7:0]                cfg_idx,
  input  logic [CFG_W-1:0]          cfg_data,
  // frame control
  input  logic                      start,
  input  logic [ROI_W-1:0]          roi_size,
  output logic                      busy,
  output logic                      done,
  output logic [$clog2(NBINS)-1:0]  bin,
  output logic [1:0]                dram_mode,
  // power enables
  output logic [N_TILES*N_PE-1:0]   pe_pwr_en,
  output logic [N_TILES-1:0]        scu_pwr_en,
  // DRAM I/O commands
  output logic                      cmd_valid,
  input  logic                      cmd_ready,
  output dma_cmd_t                  cmd,
  input  logic                      dma_busy
);
  logic [ROI_W-1:0] bounds [NBINS-1];
  desc_t            descs  [NBINS];
  prog_ins_t        prog   [PROG_DEPTH];

  typedef enum logic [2:0] {C_IDLE, C_BIN, C_FETCH, C_DMA, C_WAIT, C_DONE} state_e;
  state_e           state;
  logic [ROI_W-1:0] roi;
  logic [PC_W-1:0]  pc, loop_pc;
  logic [ROI_W-1:0] iters, iter;
  logic [15:0]      wcnt;
  prog_ins_t        ins;
  logic [$clog2(NBINS)-1:0] bin_c;

  // bin lookup
  always_comb begin
    bin_c = '0;
    for (int b = 0; b < NBINS - 1; b++)
      if (roi >= bounds[b]) bin_c = bin_c + 1'b1;
  end

  assign busy = (state != C_IDLE);
  assign ins  = prog[pc];

  always_ff @(posedge clk) begin
    if (cfg_valid) begin
      case (cfg_sel)
        CFG_BOUND: bounds[cfg_idx[$clog2(NBINS)-1:0]] <= cfg_data[ROI_W-1:0];
        CFG_DESC:  descs[cfg_idx[$clog2(NBINS)-1:0]]  <= desc_t'(cfg_data[$bits(desc_t)-1:0]);
        CFG_PROG:  prog[cfg_idx[PC_W-1:0]]            <= prog_ins_t'(cfg_data);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      roi        <= '0;
      pc         <= '0;
      loop_pc    <= '0;
      iters      <= '0;
      iter       <= '0;
      wcnt       <= '0;
      bin        <= '0;
      dram_mode  <= '0;
      pe_pwr_en  <= '0;
      scu_pwr_en <= '0;
      cmd_valid  <= 1'b0;
      cmd        <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          roi   <= roi_size;
          state <= C_BIN;
        end
        C_BIN: begin
          bin        <= bin_c;
          dram_mode  <= descs[bin_c].dram_mode;
          for (int t = 0; t < N_TILES; t++) begin
            pe_pwr_en[t*N_PE +: N_PE] <= descs[bin_c].pe_en[t*N_PE +: N_PE] &
                                         {N_PE{descs[bin_c].tile_en[t]}};
            scu_pwr_en[t] <= descs[bin_c].scu_en[t] & descs[bin_c].tile_en[t];
          end
          pc    <= descs[bin_c].prog_base;
          iter  <= '0;
          state <= C_FETCH;
        end
        C_FETCH: begin
          case (ins.op)
            CI_DMA: begin
              cmd       <= ins.cmd;
              if (ins.cmd.op != DMA_SEND)
                cmd.dram_addr <= ins.cmd.dram_addr + DRAM_AW'(iter * ROI_W'(ins.step));
              cmd_valid <= 1'b1;
              state     <= C_DMA;
            end
            CI_WAIT: begin
              wcnt  <= ins.cnt;
              state <= C_WAIT;
            end
            CI_LOOP: begin
              iters   <= ROI_W'((roi + ((ROI_W'(1) << ins.cnt[4:0]) - 1'b1)) >> ins.cnt[4:0]);
              iter    <= '0;
              loop_pc <= pc + 1'b1;
              pc      <= pc + 1'b1;
            end
            CI_ENDL: begin
              if (iter + 1'b1 < iters) begin
                iter <= iter + 1'b1;
                pc   <= loop_pc;
              end else begin
                iter <= '0;
                pc   <= pc + 1'b1;
              end
            end
            default: state <= C_DONE;  // CI_END
          endcase
        end
        C_DMA: if (cmd_ready) begin
          cmd_valid <= 1'b0;
          pc        <= pc + 1'b1;
          state     <= C_FETCH;
        end
        C_WAIT: if (!dma_busy && !cmd_valid) begin
          if (wcnt == '0) begin
            pc    <= pc + 1'b1;
            state <= C_FETCH;
          end else wcnt <= wcnt - 1'b1;
        end
        C_DONE: if (!dma_busy) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
