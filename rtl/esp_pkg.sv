// esp_pkg: types and constants shared by the tiles, caches and NoC of the
// ESP-style multicore RISC-V SoC.
//
// The SoC is a 3x3 grid of tiles (4 processor tiles, 2 memory tiles, one
// auxiliary tile, 2 empty slots) joined by six NoC planes: three for
// coherence (request, forward, response), two for DMA (request, response)
// and one for memory-mapped register access and interrupts. The plane
// split, the grid and the tile mix follow the paper; message encodings,
// widths and the address map are this design's own choices.
//
// Every NoC packet is a single flit that carries a whole cache line. The
// flit holds a lookahead field: the output port to take at the router it
// is arriving at, so a router never computes its own route.
package esp_pkg;

  // ---------------- geometry of the evaluation SoC ----------------
  localparam int unsigned NOC_X    = 3;
  localparam int unsigned NOC_Y    = 3;
  localparam int unsigned N_TILES  = NOC_X * NOC_Y;
  localparam int unsigned COORD_W  = 3;
  localparam int unsigned TID_W    = 4;          // tile index width
  localparam int unsigned N_PLANES = 6;

  // ---------------- memory system ----------------
  localparam int unsigned ADDR_W   = 32;
  localparam int unsigned WORD_W   = 64;         // CVA6 is a 64-bit core
  localparam int unsigned LINE_W   = 128;        // cache line, bits
  localparam int unsigned LINE_B   = LINE_W / 8; // 16 bytes
  localparam int unsigned OFF_W    = 4;          // log2(LINE_B)

  // Two memory tiles split the address space into two contiguous halves.
  // Address bit MEM_SPLIT_BIT selects the home memory tile.
  localparam int unsigned MEM_SPLIT_BIT = 28;

  // ---------------- NoC ports ----------------
  typedef enum logic [2:0] {
    P_N = 3'd0, P_E = 3'd1, P_S = 3'd2, P_W = 3'd3, P_L = 3'd4
  } port_e;

  // ---------------- messages ----------------
  typedef enum logic [4:0] {
    // plane 1: coherence requests, L2 -> LLC
    REQ_GETS     = 5'd0,
    REQ_GETM     = 5'd1,
    REQ_PUTS     = 5'd2,
    REQ_PUTM     = 5'd3,
    // plane 2: coherence forwards, LLC -> L2
    FWD_GETS     = 5'd4,
    FWD_GETM     = 5'd5,
    FWD_INV      = 5'd6,
    // plane 3: coherence responses, both ways
    RSP_DATA_S   = 5'd7,
    RSP_DATA_E   = 5'd8,
    RSP_DATA_M   = 5'd9,
    RSP_PUTACK   = 5'd10,
    RSP_INVACK   = 5'd11,
    RSP_FWD_DATA = 5'd12,
    // plane 4: DMA requests to the LLC, plane 5: DMA responses
    DMA_RD       = 5'd13,
    DMA_WR       = 5'd14,
    DMA_DATA     = 5'd15,
    DMA_WRACK    = 5'd16,
    // plane 6: memory-mapped registers and interrupts
    IO_WR        = 5'd17,
    IO_ACK       = 5'd18,
    IO_IRQ       = 5'd19
  } msg_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
  } coord_t;

  typedef struct packed {
    port_e              la;     // lookahead: output port at the receiving router
    coord_t             dst;
    coord_t             src;
    msg_e               msg;
    logic [ADDR_W-1:0]  addr;
    logic [7:0]         aux;    // burst length, dirty flag, register index
    logic [LINE_W-1:0]  data;
  } flit_t;

  // Socket register offsets carried in flit.aux of IO_WR.
  localparam logic [7:0] REG_L2_FLUSH  = 8'h01;
  localparam logic [7:0] REG_LLC_FLUSH = 8'h02;

  // ---------------- AXI (single beat, line-wide data) ----------------
  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_EXOKAY = 2'b01;
  localparam int unsigned AXI_ID_W  = 2;

  // AXI5 ATOP encodings (ATOP[5:4]: 00 none, 01 store, 10 load, 11 swap/cmp)
  localparam logic [5:0] ATOP_NONE = 6'b000000;
  localparam logic [5:0] ATOP_SWAP = 6'b110000;
  localparam logic [1:0] ATOP_LOAD = 2'b10;
  typedef enum logic [2:0] {
    AMO_ADD = 3'd0, AMO_CLR = 3'd1, AMO_EOR = 3'd2, AMO_SET = 3'd3,
    AMO_SMAX = 3'd4, AMO_SMIN = 3'd5, AMO_UMAX = 3'd6, AMO_UMIN = 3'd7
  } amo_op_e;

  // ar.user[0] marks a locked read as LR (1) or as the read of an AMO (0).
  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [ADDR_W-1:0]   addr;
    logic                lock;
    logic [2:0]          prot;
    logic                user;
  } axi_ar_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [LINE_W-1:0]   data;
    logic [1:0]          resp;
  } axi_r_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [ADDR_W-1:0]   addr;
    logic                lock;
    logic [2:0]          prot;
    logic [5:0]          atop;
  } axi_aw_t;

  typedef struct packed {
    logic [LINE_W-1:0]   data;
    logic [LINE_B-1:0]   strb;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  // ACE snoop address channel (AC); only MakeInvalid is issued.
  localparam logic [3:0] ACSNOOP_MAKEINVALID = 4'b1101;
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [3:0]        snoop;
    logic [2:0]        prot;
  } ace_ac_t;

  // ---------------- core to L1 data cache ----------------
  typedef enum logic [2:0] {
    CORE_LD = 3'd0, CORE_ST = 3'd1, CORE_AMO = 3'd2, CORE_LR = 3'd3, CORE_SC = 3'd4
  } core_op_e;

  typedef struct packed {
    core_op_e          op;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] wdata;
    logic [7:0]        be;      // byte enables within the 64-bit word
    logic [5:0]        atop;    // AXI5 ATOP of an AMO
  } core_req_t;

  typedef struct packed {
    logic [WORD_W-1:0] rdata;
    logic              sc_fail;
  } core_rsp_t;

  // ---------------- helpers ----------------
  // Dimension-ordered (X then Y) route from router (cx,cy) to dst.
  function automatic port_e xy_route(coord_t cur, coord_t dst);
    if (dst.x > cur.x)      return P_E;
    else if (dst.x < cur.x) return P_W;
    else if (dst.y > cur.y) return P_S;
    else if (dst.y < cur.y) return P_N;
    else                    return P_L;
  endfunction

  function automatic coord_t tile_coord(int unsigned idx);
    coord_t c;
    c.x = COORD_W'(idx % NOC_X);
    c.y = COORD_W'(idx / NOC_X);
    return c;
  endfunction

  function automatic logic [TID_W-1:0] coord_tid(coord_t c);
    return TID_W'(int'(c.y) * NOC_X + int'(c.x));
  endfunction

  // Tile placement of the evaluation SoC: row 0 = empty, cpu, cpu; row 1 = aux, cpu, cpu;
  // row 2 = mem, empty, mem.
  localparam coord_t MEM0_XY = '{x: 3'd0, y: 3'd2};
  localparam coord_t MEM1_XY = '{x: 3'd2, y: 3'd2};
  localparam coord_t AUX_XY  = '{x: 3'd0, y: 3'd1};

  // Home memory tile of an address.
  function automatic coord_t home_of(logic [ADDR_W-1:0] a);
    return a[MEM_SPLIT_BIT] ? MEM1_XY : MEM0_XY;
  endfunction

endpackage
