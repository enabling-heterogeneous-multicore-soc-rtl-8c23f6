// riscv_amo_adapter: AXI adapter for RISC-V atomics, between the core's L1
// and the L2.
//
// An AMO leaves the core as a single AW with a non-zero ATOP (AXI5 atomic).
// The adapter turns it into a locked read and a locked write downstream:
//   1. capture AW and W (the operand);
//   2. send AR with lock = 1 and user = 0 (AMO, not LR) and wait for R;
//   3. a small ALU combines the old value and the operand;
//   4. send AW with lock = 1, ATOP = 0 and the result on W, wait for B;
//   5. answer upstream with R (old value) and B.
// ALU operations: AtomicLoad ADD, CLR (a & ~b), EOR, SET (a | b), SMAX,
// SMIN, UMAX, UMIN and AtomicSwap, on 32-bit or 64-bit operands (the width
// is taken from the byte strobe).
// All other traffic passes through unchanged, LR (locked AR with user = 1)
// and SC (locked AW, ATOP = 0) included; the B response of an SC is
// forwarded from the L2 as it is (EXOKAY success, OKAY failure) instead of
// being answered EXOKAY by the adapter. An AMO starts only when no
// pass-through transaction is outstanding, and pass-through is held off
// while an AMO is in progress.
// The split into locked AR + AW, the lock marking, the user field and the
// bresp forwarding follow the paper; the encodings are AXI5's; the
// one-at-a-time sequencing is this design's simplification.
module riscv_amo_adapter
  import esp_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // upstream (core side, slave)
  input  logic    s_ar_valid,
  output logic    s_ar_ready,
  input  axi_ar_t s_ar,
  output logic    s_r_valid,
  input  logic    s_r_ready,
  output axi_r_t  s_r,
  input  logic    s_aw_valid,
  output logic    s_aw_ready,
  input  axi_aw_t s_aw,
  input  logic    s_w_valid,
  output logic    s_w_ready,
  input  axi_w_t  s_w,
  output logic    s_b_valid,
  input  logic    s_b_ready,
  output axi_b_t  s_b,
  // downstream (L2 side, master)
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

  typedef enum logic [2:0] {A_PASS, A_CAPW, A_RD, A_RWAIT, A_WR, A_BWAIT, A_RSP} astate_e;
  astate_e st;

  axi_aw_t           amo_aw;
  axi_w_t            amo_w;
  logic [LINE_W-1:0] old_line;
  logic [LINE_W-1:0] new_line;
  logic              aw_sent, w_sent, r_sent, b_sent;
  logic [3:0]        out_rd, out_wr;   // outstanding pass-through transactions

  logic is_amo;
  assign is_amo = s_aw_valid && (s_aw.atop != ATOP_NONE);

  // ---------------- ALU ----------------
  function automatic logic [WORD_W-1:0] alu(logic [5:0] atop, logic [WORD_W-1:0] a,
                                            logic [WORD_W-1:0] b, logic is32);
    logic [WORD_W-1:0] res;
    logic signed [WORD_W-1:0] sa, sb;
    logic lt_s, lt_u;
    sa = is32 ? WORD_W'(signed'(a[31:0])) : a;
    sb = is32 ? WORD_W'(signed'(b[31:0])) : b;
    lt_s = $signed(sa) < $signed(sb);
    lt_u = is32 ? (a[31:0] < b[31:0]) : (a < b);
    if (atop == ATOP_SWAP) res = b;
    else case (amo_op_e'(atop[2:0]))
      AMO_ADD:  res = a + b;
      AMO_CLR:  res = a & ~b;
      AMO_EOR:  res = a ^ b;
      AMO_SET:  res = a | b;
      AMO_SMAX: res = lt_s ? b : a;
      AMO_SMIN: res = lt_s ? a : b;
      AMO_UMAX: res = lt_u ? b : a;
      default:  res = lt_u ? a : b;
    endcase
    return res;
  endfunction

  // Select the addressed 32/64-bit lane of the line, compute, write back.
  always_comb begin
    logic [WORD_W-1:0] a, b, res;
    logic [7:0]        st8;
    logic              is32, hi32;
    st8  = amo_aw.addr[3] ? amo_w.strb[15:8] : amo_w.strb[7:0];
    is32 = (st8 != 8'hFF);
    hi32 = is32 && (st8[7:4] != 4'h0);
    a    = amo_aw.addr[3] ? old_line[127:64] : old_line[63:0];
    b    = amo_aw.addr[3] ? amo_w.data[127:64] : amo_w.data[63:0];
    if (hi32) begin
      a = {32'd0, a[63:32]};
      b = {32'd0, b[63:32]};
    end
    res = alu(amo_aw.atop, a, b, is32);
    if (hi32) res = {res[31:0], 32'd0};
    new_line = amo_w.data;
    if (amo_aw.addr[3]) new_line[127:64] = res;
    else                new_line[63:0]   = res;
  end

  // ---------------- channel muxing ----------------
  logic pass;
  assign pass = (st == A_PASS);

  always_comb begin
    // AR
    m_ar_valid = pass ? s_ar_valid : (st == A_RD);
    if (pass) m_ar = s_ar;
    else begin
      m_ar      = '0;
      m_ar.id   = amo_aw.id;
      m_ar.addr = {amo_aw.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
      m_ar.lock = 1'b1;
      m_ar.prot = amo_aw.prot;
      m_ar.user = 1'b0;
    end
    s_ar_ready = pass && m_ar_ready;
    // R
    s_r_valid = pass ? m_r_valid : (st == A_RSP && !r_sent);
    s_r       = pass ? m_r : '{id: amo_aw.id, data: old_line, resp: AXI_OKAY};
    m_r_ready = pass ? s_r_ready : (st == A_RWAIT);
    // AW / W
    m_aw_valid = pass ? (s_aw_valid && !is_amo) : (st == A_WR && !aw_sent);
    if (pass) m_aw = s_aw;
    else begin
      m_aw      = amo_aw;
      m_aw.lock = 1'b1;
      m_aw.atop = ATOP_NONE;
    end
    s_aw_ready = pass ? (is_amo ? (out_rd == 0 && out_wr == 0) : m_aw_ready) : 1'b0;
    m_w_valid  = pass ? (s_w_valid && !is_amo) : (st == A_WR && !w_sent);
    m_w        = pass ? s_w : '{data: new_line, strb: amo_w.strb};
    s_w_ready  = pass ? (!is_amo && m_w_ready) : (st == A_CAPW);
    // B
    s_b_valid = pass ? m_b_valid : (st == A_RSP && !b_sent);
    s_b       = pass ? m_b : '{id: amo_aw.id, resp: AXI_OKAY};
    m_b_ready = pass ? s_b_ready : (st == A_BWAIT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= A_PASS;
      amo_aw   <= '0;
      amo_w    <= '0;
      old_line <= '0;
      aw_sent  <= 1'b0;
      w_sent   <= 1'b0;
      r_sent   <= 1'b0;
      b_sent   <= 1'b0;
      out_rd   <= '0;
      out_wr   <= '0;
    end else begin
      case (st)
        A_PASS: begin
          out_rd <= out_rd + 4'(m_ar_valid && m_ar_ready) - 4'(m_r_valid && m_r_ready);
          out_wr <= out_wr + 4'(m_aw_valid && m_aw_ready) - 4'(m_b_valid && m_b_ready);
          if (is_amo && s_aw_ready) begin
            amo_aw <= s_aw;
            st     <= A_CAPW;
          end
        end
        A_CAPW: if (s_w_valid) begin
          amo_w <= s_w;
          st    <= A_RD;
        end
        A_RD:    if (m_ar_ready) st <= A_RWAIT;
        A_RWAIT: if (m_r_valid) begin
          old_line <= m_r.data;
          aw_sent  <= 1'b0;
          w_sent   <= 1'b0;
          st       <= A_WR;
        end
        A_WR: begin
          if (m_aw_ready) aw_sent <= 1'b1;
          if (m_w_ready)  w_sent  <= 1'b1;
          if ((aw_sent || m_aw_ready) && (w_sent || m_w_ready)) st <= A_BWAIT;
        end
        A_BWAIT: if (m_b_valid) begin
          r_sent <= 1'b0;
          b_sent <= 1'b0;
          st     <= A_RSP;
        end
        A_RSP: begin
          if (s_r_ready) r_sent <= 1'b1;
          if (s_b_ready) b_sent <= 1'b1;
          if ((r_sent || s_r_ready) && (b_sent || s_b_ready)) st <= A_PASS;
        end
        default: st <= A_PASS;
      endcase
    end
  end

endmodule
