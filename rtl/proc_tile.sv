// proc_tile: a processor tile, everything between the core pipeline and
// the NoC.
//
//   core data port -> l1_dcache --AXI--> axi_ifetch_mux <-- fetch port
//                                            |
//                                    riscv_amo_adapter
//                                            |
//                                        l2_cache  <-> NoC planes 1, 2, 3
//   l2_cache --AC--> ace_inval_demux --> dcache_inval --> l1_dcache
//                                    \-> instruction-cache invalidation out
//   socket_io (plane 6) --flush--> l2_cache --l1_flush--> l1_dcache
//
// The core pipeline and its instruction cache are not part of this RTL:
// the tile exposes the core's data request port, its fetch read port and
// the instruction-cache invalidation output (the instruction cache is not
// modified to act on it). Planes 4 and 5 (DMA) are not used by a
// processor tile.
// NoC ports are arrays indexed by plane - 1 (index 0 = plane 1).
// The chain of blocks follows the paper; the exposed core ports are this
// design's choice.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff) of the blocks inside, so lint reports
// it as used both ways (SYNCASYNCNET); the assertions are simulation
// checks only.
module proc_tile
  import esp_pkg::*;
#(
  parameter int unsigned L1_SETS = 2048,
  parameter int unsigned L2_SETS = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_xy,
  // core data port
  input  logic              core_req_valid,
  output logic              core_req_ready,
  input  core_req_t         core_req,
  output logic              core_rsp_valid,
  output core_rsp_t         core_rsp,
  // instruction fetch port (line reads)
  input  logic              fetch_valid,
  output logic              fetch_ready,
  input  logic [ADDR_W-1:0] fetch_addr,
  output logic              fetch_rsp_valid,
  output logic [LINE_W-1:0] fetch_rsp_data,
  // invalidations for the instruction cache
  output logic              ic_inval_valid,
  input  logic              ic_inval_ready,
  output ace_ac_t           ic_inval,
  output logic              irq,
  // NoC
  output logic [5:0]        noc_out_valid,
  input  logic [5:0]        noc_out_ready,
  output flit_t             noc_out [6],
  input  logic [5:0]        noc_in_valid,
  output logic [5:0]        noc_in_ready,
  input  flit_t             noc_in  [6]
);

  // L1 <-> mux
  logic d_ar_valid, d_ar_ready, d_r_valid, d_r_ready, d_aw_valid, d_aw_ready;
  logic d_w_valid, d_w_ready, d_b_valid, d_b_ready;
  axi_ar_t d_ar; axi_r_t d_r; axi_aw_t d_aw; axi_w_t d_w; axi_b_t d_b;
  // mux <-> adapter
  logic c_ar_valid, c_ar_ready, c_r_valid, c_r_ready, c_aw_valid, c_aw_ready;
  logic c_w_valid, c_w_ready, c_b_valid, c_b_ready;
  axi_ar_t c_ar; axi_r_t c_r; axi_aw_t c_aw; axi_w_t c_w; axi_b_t c_b;
  // adapter <-> L2
  logic l_ar_valid, l_ar_ready, l_r_valid, l_r_ready, l_aw_valid, l_aw_ready;
  logic l_w_valid, l_w_ready, l_b_valid, l_b_ready;
  axi_ar_t l_ar; axi_r_t l_r; axi_aw_t l_aw; axi_w_t l_w; axi_b_t l_b;

  logic    ac_valid, ac_ready, dc_ac_valid, dc_ac_ready;
  ace_ac_t ac, dc_ac;
  logic    inv_valid, inv_hit;
  logic [ADDR_W-1:0] inv_addr;
  logic    l1_flush, l1_flush_done, l2_flush_req, l2_flush_done;
  logic [15:0] inv_hits, inv_misses;

  l1_dcache #(.SETS(L1_SETS)) u_l1d (
    .clk, .rst_n,
    .req_valid(core_req_valid), .req_ready(core_req_ready), .req(core_req),
    .rsp_valid(core_rsp_valid), .rsp(core_rsp),
    .inv_valid, .inv_addr, .inv_hit,
    .flush(l1_flush), .flush_done(l1_flush_done),
    .ar_valid(d_ar_valid), .ar_ready(d_ar_ready), .ar(d_ar),
    .r_valid(d_r_valid), .r_ready(d_r_ready), .r(d_r),
    .aw_valid(d_aw_valid), .aw_ready(d_aw_ready), .aw(d_aw),
    .w_valid(d_w_valid), .w_ready(d_w_ready), .w(d_w),
    .b_valid(d_b_valid), .b_ready(d_b_ready), .b(d_b)
  );

  dcache_inval u_inval (
    .clk, .rst_n,
    .ac_valid(dc_ac_valid), .ac_ready(dc_ac_ready), .ac(dc_ac),
    .lk_valid(inv_valid), .lk_addr(inv_addr), .lk_hit(inv_hit),
    .n_hits(inv_hits), .n_misses(inv_misses)
  );

  ace_inval_demux u_demux (
    .ac_valid, .ac_ready, .ac,
    .ic_valid(ic_inval_valid), .ic_ready(ic_inval_ready), .ic_ac(ic_inval),
    .dc_valid(dc_ac_valid), .dc_ready(dc_ac_ready), .dc_ac(dc_ac)
  );

  axi_ifetch_mux u_mux (
    .clk, .rst_n,
    .d_ar_valid, .d_ar_ready, .d_ar, .d_r_valid, .d_r_ready, .d_r,
    .d_aw_valid, .d_aw_ready, .d_aw, .d_w_valid, .d_w_ready, .d_w,
    .d_b_valid, .d_b_ready, .d_b,
    .i_ar_valid(fetch_valid), .i_ar_ready(fetch_ready), .i_ar_addr(fetch_addr),
    .i_r_valid(fetch_rsp_valid), .i_r_ready(1'b1), .i_r_data(fetch_rsp_data),
    .m_ar_valid(c_ar_valid), .m_ar_ready(c_ar_ready), .m_ar(c_ar),
    .m_r_valid(c_r_valid), .m_r_ready(c_r_ready), .m_r(c_r),
    .m_aw_valid(c_aw_valid), .m_aw_ready(c_aw_ready), .m_aw(c_aw),
    .m_w_valid(c_w_valid), .m_w_ready(c_w_ready), .m_w(c_w),
    .m_b_valid(c_b_valid), .m_b_ready(c_b_ready), .m_b(c_b)
  );

  riscv_amo_adapter u_amo (
    .clk, .rst_n,
    .s_ar_valid(c_ar_valid), .s_ar_ready(c_ar_ready), .s_ar(c_ar),
    .s_r_valid(c_r_valid), .s_r_ready(c_r_ready), .s_r(c_r),
    .s_aw_valid(c_aw_valid), .s_aw_ready(c_aw_ready), .s_aw(c_aw),
    .s_w_valid(c_w_valid), .s_w_ready(c_w_ready), .s_w(c_w),
    .s_b_valid(c_b_valid), .s_b_ready(c_b_ready), .s_b(c_b),
    .m_ar_valid(l_ar_valid), .m_ar_ready(l_ar_ready), .m_ar(l_ar),
    .m_r_valid(l_r_valid), .m_r_ready(l_r_ready), .m_r(l_r),
    .m_aw_valid(l_aw_valid), .m_aw_ready(l_aw_ready), .m_aw(l_aw),
    .m_w_valid(l_w_valid), .m_w_ready(l_w_ready), .m_w(l_w),
    .m_b_valid(l_b_valid), .m_b_ready(l_b_ready), .m_b(l_b)
  );

  l2_cache #(.SETS(L2_SETS)) u_l2 (
    .clk, .rst_n, .my_xy,
    .ar_valid(l_ar_valid), .ar_ready(l_ar_ready), .ar(l_ar),
    .r_valid(l_r_valid), .r_ready(l_r_ready), .r(l_r),
    .aw_valid(l_aw_valid), .aw_ready(l_aw_ready), .aw(l_aw),
    .w_valid(l_w_valid), .w_ready(l_w_ready), .w(l_w),
    .b_valid(l_b_valid), .b_ready(l_b_ready), .b(l_b),
    .ac_valid, .ac_ready, .ac,
    .flush_req(l2_flush_req), .flush_done(l2_flush_done),
    .l1_flush, .l1_flush_done,
    .req_out_valid(noc_out_valid[0]), .req_out_ready(noc_out_ready[0]), .req_out(noc_out[0]),
    .fwd_in_valid(noc_in_valid[1]), .fwd_in_ready(noc_in_ready[1]), .fwd_in(noc_in[1]),
    .rsp_in_valid(noc_in_valid[2]), .rsp_in_ready(noc_in_ready[2]), .rsp_in(noc_in[2]),
    .rsp_out_valid(noc_out_valid[2]), .rsp_out_ready(noc_out_ready[2]), .rsp_out(noc_out[2])
  );

  socket_io #(.FLUSH_REG(REG_L2_FLUSH)) u_io (
    .clk, .rst_n, .my_xy,
    .io_in_valid(noc_in_valid[5]), .io_in_ready(noc_in_ready[5]), .io_in(noc_in[5]),
    .io_out_valid(noc_out_valid[5]), .io_out_ready(noc_out_ready[5]), .io_out(noc_out[5]),
    .flush_req(l2_flush_req), .flush_done(l2_flush_done), .irq
  );

  // planes a processor tile does not send on or receive from
  assign noc_out_valid[1] = 1'b0;
  assign noc_out[1]       = '0;
  assign noc_out_valid[3] = 1'b0;
  assign noc_out[3]       = '0;
  assign noc_out_valid[4] = 1'b0;
  assign noc_out[4]       = '0;
  assign noc_in_ready[0]  = 1'b1;
  assign noc_in_ready[3]  = 1'b1;
  assign noc_in_ready[4]  = 1'b1;

endmodule
