// steroi_l2: the L2 processor of the ROI stereo-depth system.
//
// The L2 processor receives regions of interest (ROIs) from the sensor-side
// trackers and runs stereo-depth (and, now and then, object-detection) networks
// on them. Its size of work changes from frame to frame with the ROI, so the
// controller picks a mapping per ROI-size bin, powers only the tiles, PEs and
// SCUs that mapping uses, and drives the DRAM I/O with the bin's program.
//
// Structure: controller -> DRAM I/O -> west port of tile 0; N_TILES tiles in a
// row, each tile's east link joined to the next tile's west link; the last
// tile's east port is unconnected. All data moves as multipackets (one word,
// many destinations) over the two-level mesh.
//
// Ports: the controller's configuration and frame ports, the power enables it
// drives (for observation), and the DRAM request/response port. The DRAM chip
// itself is outside the design. The composition follows the paper's
// architecture drawing; how the DRAM I/O attaches (to tile 0) is this design's
// choice.
module steroi_l2
  import steroi_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration of the binned mapping
  input  logic                      cfg_valid,
  input  cfg_sel_e                  cfg_sel,
  input  logic [7:0]                cfg_idx,
  input  logic [CFG_W-1:0]          cfg_data,
  // frame
  input  logic                      start,
  input  logic [ROI_W-1:0]          roi_size,
  output logic                      busy,
  output logic                      done,
  output logic [$clog2(NBINS)-1:0]  bin,
  output logic [1:0]                dram_mode,
  output logic [N_TILES*N_PE-1:0]   pe_pwr_en,
  output logic [N_TILES-1:0]        scu_pwr_en,
  // DRAM
  output logic                      dram_req_valid,
  input  logic                      dram_req_ready,
  output logic                      dram_req_we,
  output logic [DRAM_AW-1:0]        dram_req_addr,
  output logic [FLIT_W-1:0]         dram_req_wdata,
  input  logic                      dram_rsp_valid,
  input  logic [FLIT_W-1:0]         dram_rsp_data
);
  logic     cmd_valid, cmd_ready, dma_busy;
  dma_cmd_t cmd;

  controller u_ctrl (
    .clk, .rst_n, .cfg_valid, .cfg_sel, .cfg_idx, .cfg_data,
    .start, .roi_size, .busy, .done, .bin, .dram_mode,
    .pe_pwr_en, .scu_pwr_en,
    .cmd_valid, .cmd_ready, .cmd, .dma_busy);

  // links between neighbours: index t is the link west of tile t
  // (eastbound *_e, westbound *_w); index N_TILES is east of the last tile.
  logic [N_TILES:0] lv_e, lr_e, lv_w, lr_w;
  pkt_t [N_TILES:0] lp_e, lp_w;

  dram_io u_dram_io (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy(dma_busy),
    .out_valid(lv_e[0]), .out_ready(lr_e[0]), .out_pkt(lp_e[0]),
    .in_valid(lv_w[0]),  .in_ready(lr_w[0]),  .in_pkt(lp_w[0]),
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr,
    .dram_req_wdata, .dram_rsp_valid, .dram_rsp_data);

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(.TILE_ID(t)) u_tile (
      .clk, .rst_n,
      .pe_pwr_en(pe_pwr_en[t*N_PE +: N_PE]), .scu_pwr_en(scu_pwr_en[t]),
      .w_in_valid(lv_e[t]),    .w_in_ready(lr_e[t]),    .w_in_pkt(lp_e[t]),
      .w_out_valid(lv_w[t]),   .w_out_ready(lr_w[t]),   .w_out_pkt(lp_w[t]),
      .e_in_valid(lv_w[t+1]),  .e_in_ready(lr_w[t+1]),  .e_in_pkt(lp_w[t+1]),
      .e_out_valid(lv_e[t+1]), .e_out_ready(lr_e[t+1]), .e_out_pkt(lp_e[t+1]));
  end

  // nothing lies east of the last tile
  assign lv_w[N_TILES] = 1'b0;
  assign lp_w[N_TILES] = '0;
  assign lr_e[N_TILES] = 1'b1;
endmodule
