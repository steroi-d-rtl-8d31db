// tile: one tile of the L2 processor.
//
// Holds PE_X x PE_Y processing elements on a local mesh, one special compute
// unit and the tile router, which is this tile's node of the global network.
// Each PE has its own router (ports local, N, E, S, W). The bottom PE of
// every column links through its south port to the tile router, so the mesh
// has PE_X links to the tile router; the SCU hangs directly off the tile
// router, whose last two ports are the east and west links of the global row.
// Route masks come from steroi_pkg: X then Y inside the tile, straight down
// the column for anything leaving it, along the row between tiles. The tile
// router splits an incoming multipacket by column, so a copy enters only the
// columns that hold one of its destinations.
//
// The paper gives the hierarchy (tiles of PEs, one SCU per tile, mesh NoCs
// locally and globally), and its architecture drawing shows both bottom PEs
// linked to the tile's router; port numbering and routes are this design's
// choice. pe_pwr_en / scu_pwr_en gate the PEs and the SCU; the routers stay
// powered so traffic to other tiles can pass.
module tile
  import steroi_pkg::*;
#(
  parameter int TILE_ID = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_PE-1:0]  pe_pwr_en,
  input  logic             scu_pwr_en,
  // east link
  input  logic             e_in_valid,
  output logic             e_in_ready,
  input  pkt_t             e_in_pkt,
  output logic             e_out_valid,
  input  logic             e_out_ready,
  output pkt_t             e_out_pkt,
  // west link
  input  logic             w_in_valid,
  output logic             w_in_ready,
  input  pkt_t             w_in_pkt,
  output logic             w_out_valid,
  input  logic             w_out_ready,
  output pkt_t             w_out_pkt
);
  // ----------------------------------------------------------- tile router
  logic [TP_NP-1:0] t_iv, t_ir, t_ov, t_or;
  pkt_t [TP_NP-1:0] t_ip, t_op;

  function automatic logic [TP_NP-1:0][NE-1:0] tile_routes(int t);
    logic [TP_NP-1:0][NE-1:0] r;
    for (int p = 0; p < TP_NP; p++) r[p] = tile_route(t, p);
    return r;
  endfunction

  noc_router #(.NP(TP_NP), .ROUTE(tile_routes(TILE_ID))) u_trouter (
    .clk, .rst_n, .in_valid(t_iv), .in_ready(t_ir), .in_pkt(t_ip),
    .out_valid(t_ov), .out_ready(t_or), .out_pkt(t_op));

  assign t_iv[TP_E] = e_in_valid;  assign e_in_ready = t_ir[TP_E];  assign t_ip[TP_E] = e_in_pkt;
  assign e_out_valid = t_ov[TP_E]; assign t_or[TP_E] = e_out_ready; assign e_out_pkt = t_op[TP_E];
  assign t_iv[TP_W] = w_in_valid;  assign w_in_ready = t_ir[TP_W];  assign t_ip[TP_W] = w_in_pkt;
  assign w_out_valid = t_ov[TP_W]; assign t_or[TP_W] = w_out_ready; assign w_out_pkt = t_op[TP_W];

  // ------------------------------------------------------------------ SCU
  scu u_scu (
    .clk, .rst_n, .pwr_en(scu_pwr_en),
    .in_valid(t_ov[TP_SCU]), .in_ready(t_or[TP_SCU]), .in_pkt(t_op[TP_SCU]),
    .out_valid(t_iv[TP_SCU]), .out_ready(t_ir[TP_SCU]), .out_pkt(t_ip[TP_SCU]));

  // ------------------------------------------------------- PE local mesh
  logic [N_PE-1:0][4:0] r_iv, r_ir, r_ov, r_or;
  pkt_t [N_PE-1:0][4:0] r_ip, r_op;

  function automatic logic [4:0][NE-1:0] pe_routes(int t, int x, int y);
    logic [4:0][NE-1:0] r;
    for (int p = 0; p < 5; p++) r[p] = pe_route(t, x, y, p);
    return r;
  endfunction

  for (genvar y = 0; y < PE_Y; y++) begin : g_y
    for (genvar x = 0; x < PE_X; x++) begin : g_x
      localparam int R = y * PE_X + x;

      noc_router #(.NP(5), .ROUTE(pe_routes(TILE_ID, x, y))) u_router (
        .clk, .rst_n, .in_valid(r_iv[R]), .in_ready(r_ir[R]), .in_pkt(r_ip[R]),
        .out_valid(r_ov[R]), .out_ready(r_or[R]), .out_pkt(r_op[R]));

      pe u_pe (
        .clk, .rst_n, .pwr_en(pe_pwr_en[R]),
        .in_valid(r_ov[R][P_LOCAL]), .in_ready(r_or[R][P_LOCAL]), .in_pkt(r_op[R][P_LOCAL]),
        .out_valid(r_iv[R][P_LOCAL]), .out_ready(r_ir[R][P_LOCAL]), .out_pkt(r_ip[R][P_LOCAL]));

      // north
      if (y < PE_Y - 1) begin : g_n
        assign r_iv[R][P_N] = r_ov[R+PE_X][P_S];
        assign r_ip[R][P_N] = r_op[R+PE_X][P_S];
        assign r_or[R][P_N] = r_ir[R+PE_X][P_S];
      end else begin : g_n_edge
        assign r_iv[R][P_N] = 1'b0;
        assign r_ip[R][P_N] = '0;
        assign r_or[R][P_N] = 1'b1;
      end
      // south
      if (y > 0) begin : g_s
        assign r_iv[R][P_S] = r_ov[R-PE_X][P_N];
        assign r_ip[R][P_S] = r_op[R-PE_X][P_N];
        assign r_or[R][P_S] = r_ir[R-PE_X][P_N];
      end else begin : g_s_tile
        assign r_iv[R][P_S]    = t_ov[TP_MESH+x];
        assign r_ip[R][P_S]    = t_op[TP_MESH+x];
        assign t_or[TP_MESH+x] = r_ir[R][P_S];
        assign t_iv[TP_MESH+x] = r_ov[R][P_S];
        assign t_ip[TP_MESH+x] = r_op[R][P_S];
        assign r_or[R][P_S]    = t_ir[TP_MESH+x];
      end
      // east
      if (x < PE_X - 1) begin : g_e
        assign r_iv[R][P_E] = r_ov[R+1][P_W];
        assign r_ip[R][P_E] = r_op[R+1][P_W];
        assign r_or[R][P_E] = r_ir[R+1][P_W];
      end else begin : g_e_edge
        assign r_iv[R][P_E] = 1'b0;
        assign r_ip[R][P_E] = '0;
        assign r_or[R][P_E] = 1'b1;
      end
      // west
      if (x > 0) begin : g_w
        assign r_iv[R][P_W] = r_ov[R-1][P_E];
        assign r_ip[R][P_W] = r_op[R-1][P_E];
        assign r_or[R][P_W] = r_ir[R-1][P_E];
      end else begin : g_w_edge
        assign r_iv[R][P_W] = 1'b0;
        assign r_ip[R][P_W] = '0;
        assign r_or[R][P_W] = 1'b1;
      end
    end
  end
endmodule
