// esp_soc: the evaluation SoC, a 3x3 tile grid with four processor tiles,
// two memory tiles and the auxiliary tile, joined by six NoC planes.
//
// Floorplan (x to the right, y downwards; tile index = 3*y + x):
//     (0,0) empty   (1,0) cpu 0   (2,0) cpu 1
//     (0,1) aux     (1,1) cpu 2   (2,1) cpu 3
//     (0,2) mem 0   (1,2) empty   (2,2) mem 1
// Planes: 1 coherence requests, 2 coherence forwards, 3 coherence
// responses, 4 DMA requests, 5 DMA responses, 6 register access and
// interrupts. Memory tile 0 is home of addresses with bit 28 clear,
// memory tile 1 of those with bit 28 set.
// What is not RTL here comes out as ports: each core's data and fetch
// ports and its instruction-cache invalidations (the CVA6 pipeline and
// instruction cache), each memory tile's DRAM channel (the DDR controller),
// and the auxiliary tile's attachment to all six planes (its peripherals:
// Ethernet debug link, UART, interrupt controller, boot ROM). Through the
// aux ports a host can write the flush registers, send interrupts and
// issue DMA to the LLCs.
// The grid, tile mix, plane count and plane roles follow the paper; the
// address split and the port set are this design's choices.
// Lint note: rst_n is the asynchronous reset of every flop and is also
// sampled by the clocked assertions (disable iff) inside the caches and
// routers; a lint tool therefore reports it as used both synchronously and
// asynchronously (SYNCASYNCNET). The assertions are simulation checks only.
module esp_soc
  import esp_pkg::*;
#(
  parameter int unsigned L1_SETS  = 2048,    // 32 KiB L1 data cache
  parameter int unsigned L2_SETS  = 4096,    // 64 KiB L2 per processor tile
  parameter int unsigned LLC_SETS = 32768    // 512 KiB LLC per memory tile
) (
  input  logic              clk,
  input  logic              rst_n,
  // cores
  input  logic [3:0]        core_req_valid,
  output logic [3:0]        core_req_ready,
  input  core_req_t         core_req [4],
  output logic [3:0]        core_rsp_valid,
  output core_rsp_t         core_rsp [4],
  input  logic [3:0]        fetch_valid,
  output logic [3:0]        fetch_ready,
  input  logic [ADDR_W-1:0] fetch_addr [4],
  output logic [3:0]        fetch_rsp_valid,
  output logic [LINE_W-1:0] fetch_rsp_data [4],
  output logic [3:0]        ic_inval_valid,
  input  logic [3:0]        ic_inval_ready,
  output ace_ac_t           ic_inval [4],
  output logic [3:0]        irq,
  // DRAM channels
  output logic [1:0]        mem_req_valid,
  input  logic [1:0]        mem_req_ready,
  output logic [1:0]        mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr [2],
  output logic [LINE_W-1:0] mem_req_data [2],
  input  logic [1:0]        mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data [2],
  // auxiliary tile attachment, indexed by plane - 1
  input  logic [5:0]        aux_tx_valid,
  output logic [5:0]        aux_tx_ready,
  input  flit_t             aux_tx [6],
  output logic [5:0]        aux_rx_valid,
  input  logic [5:0]        aux_rx_ready,
  output flit_t             aux_rx [6]
);

  localparam int unsigned NT = NOC_X * NOC_Y;
  localparam int unsigned CPU_T [4] = '{1, 2, 4, 5};
  localparam int unsigned MEM_T [2] = '{6, 8};
  localparam int unsigned AUX_T     = 3;

  // per plane, per tile
  logic [NT-1:0] in_valid  [6];
  flit_t         in_flit   [6][NT];
  logic [NT-1:0] in_ready  [6];
  logic [NT-1:0] out_valid [6];
  flit_t         out_flit  [6][NT];
  logic [NT-1:0] out_ready [6];

  for (genvar p = 0; p < 6; p++) begin : g_plane
    noc_mesh #(.NX(NOC_X), .NY(NOC_Y)) u_plane (
      .clk, .rst_n,
      .loc_in_valid(in_valid[p]), .loc_in_flit(in_flit[p]), .loc_in_ready(in_ready[p]),
      .loc_out_valid(out_valid[p]), .loc_out_flit(out_flit[p]), .loc_out_ready(out_ready[p])
    );
  end

  // ---------------- processor tiles ----------------
  for (genvar c = 0; c < 4; c++) begin : g_cpu
    localparam int unsigned T = CPU_T[c];
    logic [5:0] tx_v, tx_r, rx_v, rx_r;
    flit_t      tx [6];
    flit_t      rx [6];
    for (genvar p = 0; p < 6; p++) begin : g_p
      assign in_valid[p][T]  = tx_v[p];
      assign in_flit[p][T]   = tx[p];
      assign tx_r[p]         = in_ready[p][T];
      assign rx_v[p]         = out_valid[p][T];
      assign rx[p]           = out_flit[p][T];
      assign out_ready[p][T] = rx_r[p];
    end
    proc_tile #(.L1_SETS(L1_SETS), .L2_SETS(L2_SETS)) u_tile (
      .clk, .rst_n, .my_xy(tile_coord(T)),
      .core_req_valid(core_req_valid[c]), .core_req_ready(core_req_ready[c]),
      .core_req(core_req[c]), .core_rsp_valid(core_rsp_valid[c]), .core_rsp(core_rsp[c]),
      .fetch_valid(fetch_valid[c]), .fetch_ready(fetch_ready[c]), .fetch_addr(fetch_addr[c]),
      .fetch_rsp_valid(fetch_rsp_valid[c]), .fetch_rsp_data(fetch_rsp_data[c]),
      .ic_inval_valid(ic_inval_valid[c]), .ic_inval_ready(ic_inval_ready[c]),
      .ic_inval(ic_inval[c]), .irq(irq[c]),
      .noc_out_valid(tx_v), .noc_out_ready(tx_r), .noc_out(tx),
      .noc_in_valid(rx_v), .noc_in_ready(rx_r), .noc_in(rx)
    );
  end

  // ---------------- memory tiles ----------------
  for (genvar m = 0; m < 2; m++) begin : g_mem
    localparam int unsigned T = MEM_T[m];
    logic [5:0] tx_v, tx_r, rx_v, rx_r;
    flit_t      tx [6];
    flit_t      rx [6];
    for (genvar p = 0; p < 6; p++) begin : g_p
      assign in_valid[p][T]  = tx_v[p];
      assign in_flit[p][T]   = tx[p];
      assign tx_r[p]         = in_ready[p][T];
      assign rx_v[p]         = out_valid[p][T];
      assign rx[p]           = out_flit[p][T];
      assign out_ready[p][T] = rx_r[p];
    end
    mem_tile #(.LLC_SETS(LLC_SETS)) u_tile (
      .clk, .rst_n, .my_xy(tile_coord(T)),
      .mem_req_valid(mem_req_valid[m]), .mem_req_ready(mem_req_ready[m]),
      .mem_req_we(mem_req_we[m]), .mem_req_addr(mem_req_addr[m]),
      .mem_req_data(mem_req_data[m]), .mem_rsp_valid(mem_rsp_valid[m]),
      .mem_rsp_data(mem_rsp_data[m]),
      .noc_out_valid(tx_v), .noc_out_ready(tx_r), .noc_out(tx),
      .noc_in_valid(rx_v), .noc_in_ready(rx_r), .noc_in(rx)
    );
  end

  // ---------------- auxiliary tile and empty slots ----------------
  for (genvar p = 0; p < 6; p++) begin : g_aux
    assign in_valid[p][AUX_T]  = aux_tx_valid[p];
    assign in_flit[p][AUX_T]   = aux_tx[p];
    assign aux_tx_ready[p]     = in_ready[p][AUX_T];
    assign aux_rx_valid[p]     = out_valid[p][AUX_T];
    assign aux_rx[p]           = out_flit[p][AUX_T];
    assign out_ready[p][AUX_T] = aux_rx_ready[p];
    // empty tiles 0 and 7: routers only
    assign in_valid[p][0]  = 1'b0;
    assign in_flit[p][0]   = '0;
    assign out_ready[p][0] = 1'b1;
    assign in_valid[p][7]  = 1'b0;
    assign in_flit[p][7]   = '0;
    assign out_ready[p][7] = 1'b1;
  end

endmodule
