// axi_ifetch_mux: the core's AXI adapter, merging data-cache traffic and
// instruction fetches onto the single AXI port that leaves the core.
//
// Slave 0 is the data cache (all five channels), slave 1 the instruction
// cache (read channels only). Reads are arbitrated round-robin; the AR id
// gets id[1] = source so R beats are routed back by id, and instruction
// fetches are sent with prot[2] = 1 so the L2 can tell them from data reads
// (it must keep serving them between LR and SC). Writes come only from the
// data cache and pass straight through.
// The merge point follows the paper's figure (the modified axi_adapter);
// the arbitration policy and the id/prot marking are this design's choices.
module axi_ifetch_mux
  import esp_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // data cache
  input  logic    d_ar_valid,
  output logic    d_ar_ready,
  input  axi_ar_t d_ar,
  output logic    d_r_valid,
  input  logic    d_r_ready,
  output axi_r_t  d_r,
  input  logic    d_aw_valid,
  output logic    d_aw_ready,
  input  axi_aw_t d_aw,
  input  logic    d_w_valid,
  output logic    d_w_ready,
  input  axi_w_t  d_w,
  output logic    d_b_valid,
  input  logic    d_b_ready,
  output axi_b_t  d_b,
  // instruction cache
  input  logic              i_ar_valid,
  output logic              i_ar_ready,
  input  logic [ADDR_W-1:0] i_ar_addr,
  output logic              i_r_valid,
  input  logic              i_r_ready,
  output logic [LINE_W-1:0] i_r_data,
  // master
  output logic    m_ar_valid,
  input  logic    m_ar_ready,
  output axi_ar_t m_ar,
  input  logic    m_r_valid,
  output logic    m_r_ready,
  input  axi_r_t  m_r,
  output logic    m_aw_valid,
  input  logic    m_aw_ready,
  output axi_aw_t m_aw,
  output logic    m_w_valid,
  input  logic    m_w_ready,
  output axi_w_t  m_w,
  input  logic    m_b_valid,
  output logic    m_b_ready,
  input  axi_b_t  m_b
);

  logic prio_i;   // instruction side has priority next
  logic sel_i;

  always_comb begin
    sel_i = i_ar_valid && (prio_i || !d_ar_valid);
    m_ar_valid = d_ar_valid || i_ar_valid;
    if (sel_i) begin
      m_ar      = '0;
      m_ar.id   = 2'b10;
      m_ar.addr = i_ar_addr;
      m_ar.prot = 3'b100;
    end else begin
      m_ar      = d_ar;
      m_ar.id   = {1'b0, d_ar.id[0]};
      m_ar.prot = {1'b0, d_ar.prot[1:0]};
    end
    d_ar_ready = m_ar_ready && !sel_i;
    i_ar_ready = m_ar_ready &&  sel_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prio_i <= 1'b0;
    else if (m_ar_valid && m_ar_ready) prio_i <= !sel_i;
  end

  // read data routed by id[1]
  assign i_r_valid = m_r_valid &&  m_r.id[1];
  assign d_r_valid = m_r_valid && !m_r.id[1];
  assign i_r_data  = m_r.data;
  assign d_r       = m_r;
  assign m_r_ready = m_r.id[1] ? i_r_ready : d_r_ready;

  // writes pass through
  assign m_aw_valid = d_aw_valid;
  assign d_aw_ready = m_aw_ready;
  assign m_aw       = d_aw;
  assign m_w_valid  = d_w_valid;
  assign d_w_ready  = m_w_ready;
  assign m_w        = d_w;
  assign d_b_valid  = m_b_valid;
  assign m_b_ready  = d_b_ready;
  assign d_b        = m_b;

endmodule
