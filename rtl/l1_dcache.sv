// l1_dcache: write-through L1 data cache of the core, with an
// invalidation port and a flush/flush_done pair.
//
// It stands in for the CVA6 write-through data cache (the core's own L1,
// which is third-party code): direct mapped, SETS lines of 16 bytes.
// One core request is served at a time.
//   load   : hit answers the next cycle; a miss reads the line over AXI
//            (AR/R) and installs it.
//   store  : written through over AXI (AW/W/B); a hit also updates the line.
//            The core gets its answer when B returns.
//   AMO    : the line is dropped from the L1, the AMO leaves as one AW with
//            ATOP set; the old value returns on R, completion on B.
//   LR     : locked AR with ar.user = 1; the line is not installed.
//   SC     : locked AW with ATOP = 0; B = EXOKAY means success, OKAY failure.
//            rsp.sc_fail and rsp.rdata (0 success, 1 failure) report it.
// Invalidation port (the "dedicated port" of the invalidate unit):
//   inv_valid/inv_addr look the line up combinationally, inv_hit answers in
//   the same cycle and the line is invalidated at the clock edge. If the
//   line is being refilled at that moment the refill is not installed (the
//   inv_req path to the miss unit), so a stale line can never be kept.
// Flush: while flush is high and no request is in progress, all lines are
//   invalidated in one cycle and flush_done pulses for one cycle.
// The ports and behaviour of invalidation and flush follow the paper; the
// organisation (direct mapped, blocking, write-through answer on B) is this
// design's simplification of the CVA6 cache.
module l1_dcache
  import esp_pkg::*;
#(
  parameter int unsigned SETS = 2048    // 32 KiB of 16-byte lines
) (
  input  logic       clk,
  input  logic       rst_n,
  // core
  input  logic       req_valid,
  output logic       req_ready,
  input  core_req_t  req,
  output logic       rsp_valid,
  output core_rsp_t  rsp,
  // invalidation lookup port
  input  logic              inv_valid,
  input  logic [ADDR_W-1:0] inv_addr,
  output logic              inv_hit,
  // flush
  input  logic       flush,
  output logic       flush_done,
  // AXI master
  output logic       ar_valid,
  input  logic       ar_ready,
  output axi_ar_t    ar,
  input  logic       r_valid,
  output logic       r_ready,
  input  axi_r_t     r,
  output logic       aw_valid,
  input  logic       aw_ready,
  output axi_aw_t    aw,
  output logic       w_valid,
  input  logic       w_ready,
  output axi_w_t     w,
  input  logic       b_valid,
  output logic       b_ready,
  input  axi_b_t     b
);

  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - IDX_W - OFF_W;

  typedef enum logic [2:0] {S_IDLE, S_HIT, S_RD, S_WR, S_DONE} state_e;
  state_e state;

  logic [SETS-1:0]   valid;
  logic [TAG_W-1:0]  tags  [SETS];
  logic [LINE_W-1:0] data  [SETS];

  core_req_t         cur;
  logic              ar_pend, aw_pend, w_pend, b_wait, r_wait;
  logic              kill_fill;
  logic [LINE_W-1:0] rline;
  logic [1:0]        bresp;

  function automatic logic [IDX_W-1:0] idx_of(logic [ADDR_W-1:0] a);
    return a[OFF_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction

  logic cur_hit;
  assign cur_hit = valid[idx_of(cur.addr)] && tags[idx_of(cur.addr)] == tag_of(cur.addr);
  assign inv_hit = inv_valid && valid[idx_of(inv_addr)] && tags[idx_of(inv_addr)] == tag_of(inv_addr);

  assign req_ready = (state == S_IDLE) && !flush;

  // line-wide write data and strobe from the 64-bit core word
  logic [LINE_W-1:0] wline;
  logic [LINE_B-1:0] wstrb;
  always_comb begin
    wline = {2{cur.wdata}};
    wstrb = cur.addr[3] ? {cur.be, 8'h00} : {8'h00, cur.be};
  end

  function automatic logic [LINE_W-1:0] merge(logic [LINE_W-1:0] old, logic [LINE_W-1:0] nw,
                                              logic [LINE_B-1:0] st);
    logic [LINE_W-1:0] m = old;
    for (int i = 0; i < LINE_B; i++) if (st[i]) m[i*8 +: 8] = nw[i*8 +: 8];
    return m;
  endfunction

  assign ar_valid = ar_pend;
  assign aw_valid = aw_pend;
  assign w_valid  = w_pend;
  assign r_ready  = r_wait;
  assign b_ready  = b_wait;

  always_comb begin
    ar      = '0;
    ar.addr = {cur.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
    ar.lock = (cur.op == CORE_LR);
    ar.user = (cur.op == CORE_LR);
    aw      = '0;
    aw.addr = cur.addr;
    aw.lock = (cur.op == CORE_SC);
    aw.atop = (cur.op == CORE_AMO) ? cur.atop : ATOP_NONE;
    w.data  = wline;
    w.strb  = wstrb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      valid      <= '0;
      cur        <= '0;
      ar_pend    <= 1'b0;
      aw_pend    <= 1'b0;
      w_pend     <= 1'b0;
      b_wait     <= 1'b0;
      r_wait     <= 1'b0;
      kill_fill  <= 1'b0;
      rline      <= '0;
      bresp      <= '0;
      rsp_valid  <= 1'b0;
      rsp        <= '0;
      flush_done <= 1'b0;
    end else begin
      rsp_valid  <= 1'b0;
      flush_done <= 1'b0;
      if (inv_hit) valid[idx_of(inv_addr)] <= 1'b0;
      if (inv_valid && (state == S_RD) && idx_of(inv_addr) == idx_of(cur.addr)
          && tag_of(inv_addr) == tag_of(cur.addr))
        kill_fill <= 1'b1;
      if (ar_valid && ar_ready) ar_pend <= 1'b0;
      if (aw_valid && aw_ready) aw_pend <= 1'b0;
      if (w_valid && w_ready)   w_pend  <= 1'b0;

      case (state)
        S_IDLE: begin
          if (flush) begin
            valid      <= '0;
            flush_done <= 1'b1;
          end else if (req_valid) begin
            cur       <= req;
            kill_fill <= 1'b0;
            case (req.op)
              CORE_LD: state <= S_HIT;
              CORE_LR: begin state <= S_RD; ar_pend <= 1'b1; r_wait <= 1'b1; end
              default: begin
                state   <= S_WR;
                aw_pend <= 1'b1;
                w_pend  <= 1'b1;
                b_wait  <= 1'b1;
                r_wait  <= (req.op == CORE_AMO);
                if (req.op == CORE_AMO) valid[idx_of(req.addr)] <= 1'b0;
              end
            endcase
          end
        end
        S_HIT: begin
          if (cur_hit) begin
            rsp_valid     <= 1'b1;
            rsp.rdata     <= cur.addr[3] ? data[idx_of(cur.addr)][127:64] : data[idx_of(cur.addr)][63:0];
            rsp.sc_fail   <= 1'b0;
            state         <= S_IDLE;
          end else begin
            state   <= S_RD;
            ar_pend <= 1'b1;
            r_wait  <= 1'b1;
          end
        end
        S_RD: begin
          if (r_valid && r_ready) begin
            r_wait <= 1'b0;
            if (cur.op == CORE_LD && !kill_fill &&
                !(inv_valid && idx_of(inv_addr) == idx_of(cur.addr) && tag_of(inv_addr) == tag_of(cur.addr))) begin
              valid[idx_of(cur.addr)] <= 1'b1;
              tags[idx_of(cur.addr)]  <= tag_of(cur.addr);
              data[idx_of(cur.addr)]  <= r.data;
            end
            rsp_valid   <= 1'b1;
            rsp.rdata   <= cur.addr[3] ? r.data[127:64] : r.data[63:0];
            rsp.sc_fail <= 1'b0;
            state       <= S_IDLE;
          end
        end
        S_WR: begin
          if (r_valid && r_ready) begin
            r_wait <= 1'b0;
            rline  <= r.data;
          end
          if (b_valid && b_ready) begin
            b_wait <= 1'b0;
            bresp  <= b.resp;
          end
          if (!aw_pend && !w_pend && !b_wait && !r_wait) begin
            state <= S_DONE;
          end
        end
        S_DONE: begin
          // stores and successful SCs update a line that is present
          if (cur_hit && (cur.op == CORE_ST || (cur.op == CORE_SC && bresp == AXI_EXOKAY)))
            data[idx_of(cur.addr)] <= merge(data[idx_of(cur.addr)], wline, wstrb);
          rsp_valid <= 1'b1;
          case (cur.op)
            CORE_AMO: begin
              rsp.rdata   <= cur.addr[3] ? rline[127:64] : rline[63:0];
              rsp.sc_fail <= 1'b0;
            end
            CORE_SC: begin
              rsp.rdata   <= (bresp == AXI_EXOKAY) ? 64'd0 : 64'd1;
              rsp.sc_fail <= (bresp != AXI_EXOKAY);
            end
            default: begin
              rsp.rdata   <= '0;
              rsp.sc_fail <= 1'b0;
            end
          endcase
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
