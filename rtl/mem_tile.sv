// mem_tile: a memory tile, holding one LLC slice with its directory, the
// socket register block and the channel to external DRAM.
//
// The LLC is the home of the lines in this tile's address partition. It
// receives coherence requests on plane 1, sends forwards on plane 2,
// exchanges responses on plane 3, takes DMA requests on plane 4 and answers
// them on plane 5. A write to the LLC flush register on plane 6 flushes
// the slice and is acknowledged when the flush is done. The DRAM
// controller is outside this RTL: the tile exposes a line-wide
// request/response port in its place.
// NoC ports are arrays indexed by plane - 1.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff) of the blocks inside, so lint reports
// it as used both ways (SYNCASYNCNET); the assertions are simulation
// checks only.
module mem_tile
  import esp_pkg::*;
#(
  parameter int unsigned LLC_SETS = 32768
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_xy,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [LINE_W-1:0] mem_req_data,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data,
  output logic [5:0]        noc_out_valid,
  input  logic [5:0]        noc_out_ready,
  output flit_t             noc_out [6],
  input  logic [5:0]        noc_in_valid,
  output logic [5:0]        noc_in_ready,
  input  flit_t             noc_in  [6]
);

  logic flush_req, flush_done, irq_unused;

  llc #(.SETS(LLC_SETS)) u_llc (
    .clk, .rst_n, .my_xy,
    .req_in_valid(noc_in_valid[0]), .req_in_ready(noc_in_ready[0]), .req_in(noc_in[0]),
    .fwd_out_valid(noc_out_valid[1]), .fwd_out_ready(noc_out_ready[1]), .fwd_out(noc_out[1]),
    .rsp_in_valid(noc_in_valid[2]), .rsp_in_ready(noc_in_ready[2]), .rsp_in(noc_in[2]),
    .rsp_out_valid(noc_out_valid[2]), .rsp_out_ready(noc_out_ready[2]), .rsp_out(noc_out[2]),
    .dma_in_valid(noc_in_valid[3]), .dma_in_ready(noc_in_ready[3]), .dma_in(noc_in[3]),
    .dma_out_valid(noc_out_valid[4]), .dma_out_ready(noc_out_ready[4]), .dma_out(noc_out[4]),
    .flush_req, .flush_done,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_data,
    .mem_rsp_valid, .mem_rsp_data
  );

  socket_io #(.FLUSH_REG(REG_LLC_FLUSH)) u_io (
    .clk, .rst_n, .my_xy,
    .io_in_valid(noc_in_valid[5]), .io_in_ready(noc_in_ready[5]), .io_in(noc_in[5]),
    .io_out_valid(noc_out_valid[5]), .io_out_ready(noc_out_ready[5]), .io_out(noc_out[5]),
    .flush_req, .flush_done, .irq(irq_unused)
  );

  assign noc_out_valid[0] = 1'b0;
  assign noc_out[0]       = '0;
  assign noc_out_valid[3] = 1'b0;
  assign noc_out[3]       = '0;
  assign noc_in_ready[1]  = 1'b1;
  assign noc_in_ready[4]  = 1'b1;

endmodule
