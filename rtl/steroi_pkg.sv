// steroi_pkg: configuration constants and shared types of the L2 stereo-depth
// processor.
//
// The processor is a row of tiles on a global mesh. Each tile holds a 2x2 local
// mesh of processing elements (PEs), one special compute unit (SCU) and a tile
// router. A DRAM I/O endpoint sits on the west side of tile 0. Every endpoint
// (PE, SCU, DRAM I/O) has one bit in the destination set of a multipacket.
//
// Endpoint numbering: endpoint t*EP_PER_TILE + k is PE k of tile t for
// k < N_PE (k = y*PE_X + x), endpoint t*EP_PER_TILE + N_PE is the SCU of tile t,
// and the last endpoint (DRAM_EP) is the DRAM I/O.
//
// The 16-bit data width follows the paper (its energy numbers assume 16-bit
// operations), as does one SCU per tile. The VMM size (4x4), the tile count (2)
// and PE array (2x2) repeat what the architecture drawing shows; the paper
// leaves all sizes to its design-space exploration. Packet layout, micro-op
// formats and the route-mask functions are this design's own.
package steroi_pkg;

  // ------------------------------------------------------------------ sizes
  localparam int DATA_W       = 16;   // operand width
  localparam int ACC_W        = 40;   // accumulator width
  localparam int VEC_N        = 4;    // VMM input vector length
  localparam int MAT_M        = 4;    // VMM output vector length
  localparam int PE_X         = 2;    // local mesh columns
  localparam int PE_Y         = 2;    // local mesh rows
  localparam int N_PE         = PE_X * PE_Y;
  localparam int N_TILES      = 2;    // tiles in the global row
  localparam int EP_PER_TILE  = N_PE + 1;           // PEs + one SCU
  localparam int NE           = N_TILES * EP_PER_TILE + 1;
  localparam int DRAM_EP      = NE - 1;
  localparam int ADDR_W       = 8;    // SRAM word address
  localparam int SRAM_DEPTH   = 1 << ADDR_W;
  localparam int VEC_W        = VEC_N * DATA_W;         // one vector word
  localparam int MAT_W        = VEC_N * MAT_M * DATA_W; // one matrix word
  localparam int FLIT_W       = MAT_W;                  // packet payload
  localparam int DRAM_AW      = 20;   // DRAM word address

  typedef logic [NE-1:0] dest_t;

  // ---------------------------------------------------------------- packets
  typedef enum logic [1:0] {
    PKT_WR   = 2'd0,  // write payload into SRAM[sel] at addr
    PKT_EXEC = 2'd1,  // execute the micro-op in the payload
    PKT_RD   = 2'd2   // read SRAM[sel] at addr, send it as PKT_WR (rd_req_t)
  } pkt_kind_e;

  typedef struct packed {
    dest_t              dest;   // remaining destinations (multipacket list)
    pkt_kind_e          kind;
    logic               sel;    // which of the endpoint's two SRAMs
    logic [ADDR_W-1:0]  addr;
    logic [FLIT_W-1:0]  data;
  } pkt_t;

  // payload of a PKT_RD: where the read word is sent
  typedef struct packed {
    dest_t              dest;
    logic               sel;
    logic [ADDR_W-1:0]  addr;
  } rd_req_t;
  localparam int RD_REQ_W = $bits(rd_req_t);

  // PE micro-op (payload of PKT_EXEC to a PE)
  typedef struct packed {
    logic [ADDR_W-1:0] vec_addr;   // Vector SRAM word
    logic [ADDR_W-1:0] mat_addr;   // Matrix SRAM word
    logic              load_vec;   // reload vector buffer (else stationary)
    logic              load_mat;   // reload matrix/shuffle buffer (else stationary)
    logic              depthwise;  // use shuffle buffer instead of matrix buffer
    logic [1:0]        lane_off;   // shuffle buffer diagonal rotation
    logic              acc_clear;  // start a new accumulation
    logic              wb;         // write result back to Matrix SRAM
    logic [ADDR_W-1:0] wb_addr;
    logic              relu;
    logic [4:0]        shift;      // arithmetic right shift before saturation
  } pe_op_t;

  // SCU micro-op (payload of PKT_EXEC to an SCU)
  typedef struct packed {
    logic [ADDR_W-1:0] a_addr;     // SRAM 0 word
    logic [ADDR_W-1:0] b_addr;     // SRAM 1 word
    logic              sub;        // d = a - b (else bypass: d = a)
    logic              absval;     // L1: sum |d| (else plain sum of d)
    logic              neg;        // negate the reduced value (max via min)
    logic              acc_en;     // accumulate (else bypass the accumulator)
    logic              acc_clear;  // start a new accumulation
    logic              min_en;     // feed the min/argmin stage
    logic              min_clear;  // start a new min/argmin sequence
    logic              wb;         // write result to SRAM 1
    logic              wb_min;     // write {argmin, min} (else the reduced value)
    logic [ADDR_W-1:0] wb_addr;
  } scu_op_t;

  // ------------------------------------------------------- DRAM I/O commands
  typedef enum logic [1:0] {
    DMA_LOAD  = 2'd0,  // read len DRAM words from dram_addr, multicast each as
                       // PKT_WR to pkt.dest / pkt.sel at pkt.addr + k
    DMA_SEND  = 2'd1,  // inject pkt into the NoC as it is
    DMA_WBASE = 2'd2   // set the DRAM base address for stores
  } dma_op_e;

  typedef struct packed {
    dma_op_e            op;
    logic [DRAM_AW-1:0] dram_addr;
    logic [ADDR_W:0]    len;
    pkt_t               pkt;
  } dma_cmd_t;

  // ----------------------------------------------------- controller tables
  localparam int NBINS      = 8;
  localparam int ROI_W      = 20;   // ROI size in pixels
  localparam int PROG_DEPTH = 64;
  localparam int PC_W       = $clog2(PROG_DEPTH);

  // mapping descriptor of one ROI-size bin
  typedef struct packed {
    logic [1:0]                 dram_mode;  // reported only; the program encodes it
    logic [N_TILES-1:0]         tile_en;
    logic [N_TILES*N_PE-1:0]    pe_en;
    logic [N_TILES-1:0]         scu_en;
    logic [PC_W-1:0]            prog_base;
  } desc_t;

  typedef enum logic [2:0] {
    CI_DMA   = 3'd0,  // issue cmd (LOAD/WBASE dram_addr advanced by iter*step)
    CI_WAIT  = 3'd1,  // wait until DRAM I/O is idle, then cnt more cycles
    CI_LOOP  = 3'd2,  // start loop: ceil(roi_size / 2^cnt) iterations
    CI_ENDL  = 3'd3,  // end of loop body
    CI_END   = 3'd4   // end of frame program
  } ci_op_e;

  typedef struct packed {
    ci_op_e            op;
    logic [15:0]       cnt;
    logic [7:0]        step;
    dma_cmd_t          cmd;
  } prog_ins_t;

  typedef enum logic [1:0] {CFG_BOUND = 2'd0, CFG_DESC = 2'd1, CFG_PROG = 2'd2} cfg_sel_e;
  localparam int CFG_W = $bits(prog_ins_t);

  // ------------------------------------------------- dimension-order routes
  // Router port numbering used everywhere.
  localparam int P_LOCAL = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;
  // Tile router ports: the SCU, one link per PE column (to the bottom PE of
  // column x, port TP_MESH + x), then the east and west links of the row.
  localparam int TP_SCU  = 0;
  localparam int TP_MESH = 1;
  localparam int TP_E    = TP_MESH + PE_X;
  localparam int TP_W    = TP_E + 1;
  localparam int TP_NP   = TP_W + 1;

  function automatic int pe_ep(int t, int x, int y);
    return t * EP_PER_TILE + y * PE_X + x;
  endfunction

  function automatic int scu_ep(int t);
    return t * EP_PER_TILE + N_PE;
  endfunction

  // Destinations reachable through port p of the tile router of tile t.
  // The global network is a row of tiles; DRAM I/O is west of tile 0.
  function automatic dest_t tile_route(int t, int p);
    dest_t m = '0;
    for (int e = 0; e < NE; e++) begin
      int et = (e == DRAM_EP) ? -1 : e / EP_PER_TILE;
      bit is_scu = (e != DRAM_EP) && (e % EP_PER_TILE == N_PE);
      int col    = (e % EP_PER_TILE) % PE_X;
      if (p == TP_SCU)     m[e] = (et == t) && is_scu;
      else if (p == TP_E)  m[e] = (et > t);
      else if (p == TP_W)  m[e] = (et < t);
      else                 m[e] = (et == t) && !is_scu && (col == p - TP_MESH);
    end
    return m;
  endfunction

  // Destinations reachable through port p of the PE router at (x,y) of tile t.
  // X first, then Y. Everything outside this tile's PEs goes south down its
  // column; the bottom PE of each column links to the tile router.
  function automatic dest_t pe_route(int t, int x, int y, int p);
    dest_t m = '0;
    for (int e = 0; e < NE; e++) begin
      int q;
      bit local_pe = (e != DRAM_EP) && (e / EP_PER_TILE == t) &&
                     (e % EP_PER_TILE < N_PE);
      if (local_pe) begin
        int k  = e % EP_PER_TILE;
        int dx = k % PE_X;
        int dy = k / PE_X;
        if (dx > x)      q = P_E;
        else if (dx < x) q = P_W;
        else if (dy > y) q = P_N;
        else if (dy < y) q = P_S;
        else             q = P_LOCAL;
      end else begin
        q = P_S;
      end
      m[e] = (q == p);
    end
    return m;
  endfunction

endpackage
