// l2_cache: private L2 cache of a processor tile. It takes part in the
// directory-based MESI protocol, handles RISC-V atomics and LR/SC, and
// invalidates the core's L1 through the ACE AC channel.
//
// Organisation: SETS direct-mapped lines of 16 bytes (64 KiB by default),
// stable states I, S, E, M per line. One CPU transaction at a time is held
// in a single miss-status register (cur_*), so the cache is blocking.
//
// CPU side (AXI, one beat = one line): AR/R and AW/W/B.
//   lock = 1 on AR  : atomic read; ar.user = 1 marks an LR, 0 the read of an
//                     AMO. The line is obtained in M (GetM if needed) and a
//                     reservation opens: the transient XMW condition.
//   lock = 1 on AW  : atomic write (AMO write or SC). It is performed only
//                     while the reservation for that line is still open;
//                     B = EXOKAY then, otherwise OKAY and no write.
//   prot[2] = 1     : instruction fetch. Fetches do not end a reservation;
//                     any other non-atomic data access does.
// Reservation rules. AMO (user = 0): forwards for the line are stalled until
// the write arrives, so nobody can observe the line in between. LR
// (user = 1): forwards are stalled for at most LR_HOLD cycles, then served,
// and serving one closes the reservation so the following SC fails. The
// short hold is this design's addition: without it cores that all run
// LR/SC loops on one word keep stealing the line from each other and none
// of the SCs ever succeeds. A fetch that would evict the line of an AMO
// reservation waits for the AMO write; one that evicts an LR line is served
// and closes the reservation.
//
// NoC side, single-flit messages:
//   plane 1 out: GETS, GETM, PUTS (clean eviction), PUTM (dirty, with data)
//   plane 2 in : FWD_GETS, FWD_GETM, FWD_INV from the home LLC
//   plane 3 in : RSP_DATA_S/E/M, RSP_PUTACK;  plane 3 out: RSP_FWD_DATA
//                (aux[0] = dirty), RSP_INVACK
// Transient states: MI_A (an eviction waits for its PUTACK; forwards that
// cross it are answered from the eviction buffer), IS_D/IM_AD (waiting for
// data; a forward newer than the grant is stalled until the data is
// installed, an invalidation older than the grant is served at once) and
// XMW (above). Forwards are handled by their own logic next to the main
// state machine, so they are served while the L2 waits for its own data;
// this is what keeps the protocol free of deadlock.
// L1 invalidation: whenever a line leaves the L2 (eviction, FWD_GETM,
// FWD_INV) a MakeInvalid with the line address and its stored prot bits is
// driven on the AC channel.
// Flush (flush_req pulse): the L2 first raises l1_flush and waits for
// l1_flush_done, then writes back and invalidates every line, then pulses
// flush_done.
// The protocol roles, XMW, LR/SC rules, EXOKAY/OKAY codes, AC MakeInvalid
// with permission bits and the L1-then-L2 flush order follow the paper;
// direct mapping, one MSHR, the message set and all encodings are this
// design's choices.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff), so lint reports it as used both ways
// (SYNCASYNCNET); the assertions are simulation checks only.
module l2_cache
  import esp_pkg::*;
#(
  parameter int unsigned SETS    = 4096,  // 64 KiB of 16-byte lines
  parameter int unsigned LR_HOLD = 32     // cycles an LR holds off forwards
) (
  input  logic    clk,
  input  logic    rst_n,
  input  coord_t  my_xy,
  // AXI slave (from the atomics adapter)
  input  logic    ar_valid,
  output logic    ar_ready,
  input  axi_ar_t ar,
  output logic    r_valid,
  input  logic    r_ready,
  output axi_r_t  r,
  input  logic    aw_valid,
  output logic    aw_ready,
  input  axi_aw_t aw,
  input  logic    w_valid,
  output logic    w_ready,
  input  axi_w_t  w,
  output logic    b_valid,
  input  logic    b_ready,
  output axi_b_t  b,
  // ACE snoop address channel to the core
  output logic    ac_valid,
  input  logic    ac_ready,
  output ace_ac_t ac,
  // flush
  input  logic    flush_req,
  output logic    flush_done,
  output logic    l1_flush,
  input  logic    l1_flush_done,
  // NoC
  output logic    req_out_valid,
  input  logic    req_out_ready,
  output flit_t   req_out,
  input  logic    fwd_in_valid,
  output logic    fwd_in_ready,
  input  flit_t   fwd_in,
  input  logic    rsp_in_valid,
  output logic    rsp_in_ready,
  input  flit_t   rsp_in,
  output logic    rsp_out_valid,
  input  logic    rsp_out_ready,
  output flit_t   rsp_out
);

  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - IDX_W - OFF_W;
  localparam int unsigned LA_W  = ADDR_W - OFF_W;     // line address width

  typedef enum logic [1:0] {L_I = 2'd0, L_S = 2'd1, L_E = 2'd2, L_M = 2'd3} lstate_e;
  typedef enum logic [3:0] {
    M_IDLE, M_LOOKUP, M_EVICT, M_PUTACK, M_GET, M_DATA, M_RRESP, M_BRESP,
    F_L1, F_SCAN, F_PUT, F_ACK, F_DONE
  } mstate_e;

  // ---------------- arrays ----------------
  logic [SETS-1:0]   lval;              // line present (state not I)
  lstate_e           lst   [SETS];      // meaningful only where lval is set
  logic [TAG_W-1:0]  ltag  [SETS];
  logic [2:0]        lprot [SETS];
  logic [LINE_W-1:0] ldata [SETS];

  // ---------------- main state ----------------
  mstate_e             ms;
  logic                cur_wr, cur_lock, cur_user;
  logic [2:0]          cur_prot;
  logic [AXI_ID_W-1:0] cur_id;
  logic [ADDR_W-1:0]   cur_addr;
  logic [LINE_W-1:0]   cur_wdata;
  logic [LINE_B-1:0]   cur_wstrb;
  logic [LINE_W-1:0]   rdata_q;
  logic [1:0]          resp_q;
  logic                prio_wr;
  logic                flush_pend;
  logic [IDX_W:0]      fl_idx;

  // eviction buffer (MI_A)
  logic                evb_valid;
  logic [LA_W-1:0]     evb_line;
  logic [LINE_W-1:0]   evb_data;
  logic                evb_dirty;

  // reservation (XMW)
  logic                resv_valid;
  logic                resv_lr;
  logic [LA_W-1:0]     resv_line;
  logic [7:0]          resv_age;        // cycles since the reservation opened

  // event counters, for observation
  logic [31:0] n_fwd_served, n_fwd_stall_xmw, n_fwd_stall_pend, n_sc_ok, n_sc_fail,
               n_ac_sent, n_evict, n_amo_wr, n_fetch_in_resv;

  function automatic lstate_e lstate(logic [IDX_W-1:0] i);
    return lval[i] ? lst[i] : L_I;
  endfunction
  function automatic logic [IDX_W-1:0] idx_of(logic [ADDR_W-1:0] a);
    return a[OFF_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction
  function automatic logic [LA_W-1:0] line_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1:OFF_W];
  endfunction
  function automatic logic [LINE_W-1:0] merge(logic [LINE_W-1:0] old, logic [LINE_W-1:0] nw,
                                              logic [LINE_B-1:0] st);
    logic [LINE_W-1:0] m = old;
    for (int i = 0; i < LINE_B; i++) if (st[i]) m[i*8 +: 8] = nw[i*8 +: 8];
    return m;
  endfunction

  // ---------------- CPU channel selection ----------------
  logic wr_cand, rd_cand, pick_wr, pick_rd;
  logic rd_blocked;   // a fetch would evict the line of an open AMO
  always_comb begin
    rd_blocked = resv_valid && !resv_lr && ar_valid &&
                 idx_of(ar.addr) == resv_line[IDX_W-1:0] && line_of(ar.addr) != resv_line;
    wr_cand = (ms == M_IDLE) && !flush_pend && aw_valid && w_valid;
    rd_cand = (ms == M_IDLE) && !flush_pend && ar_valid && !rd_blocked;
    pick_wr = wr_cand && (prio_wr || !rd_cand);
    pick_rd = rd_cand && !pick_wr;
  end
  assign aw_ready = pick_wr;
  assign w_ready  = pick_wr;
  assign ar_ready = pick_rd;

  assign r_valid = (ms == M_RRESP);
  assign r       = '{id: cur_id, data: rdata_q, resp: resp_q};
  assign b_valid = (ms == M_BRESP);
  assign b       = '{id: cur_id, resp: resp_q};

  // ---------------- lookup of the current request ----------------
  logic [IDX_W-1:0] cidx;
  logic             chit;
  lstate_e          cst;
  assign cidx = idx_of(cur_addr);
  assign chit = (lstate(cidx) != L_I) && (ltag[cidx] == tag_of(cur_addr));
  assign cst  = chit ? lstate(cidx) : L_I;
  logic need_m;
  assign need_m = cur_wr || cur_lock;

  // ---------------- NoC request out (registered) ----------------
  flit_t req_q;
  logic  req_v;
  assign req_out_valid = req_v;
  assign req_out       = req_q;

  function automatic flit_t mk_flit(coord_t dst, coord_t src, msg_e m,
                                    logic [ADDR_W-1:0] a, logic [7:0] x, logic [LINE_W-1:0] d);
    flit_t f;
    f.la = P_L; f.dst = dst; f.src = src; f.msg = m; f.addr = a; f.aux = x; f.data = d;
    return f;
  endfunction

  // ---------------- AC channel ----------------
  logic    main_ac_v;
  ace_ac_t main_ac;
  logic    main_ac_sent;
  assign main_ac_v = (ms == M_EVICT) && !main_ac_sent;
  always_comb begin
    main_ac.addr  = {ltag[cidx], cidx, {OFF_W{1'b0}}};
    main_ac.snoop = ACSNOOP_MAKEINVALID;
    main_ac.prot  = lprot[cidx];
  end

  // ---------------- forward handler ----------------
  logic [IDX_W-1:0] fidx;
  logic             fhit, fevb, fconf_pend, fconf_xmw, f_inval, fwd_go, fwd_stall;
  assign fidx       = idx_of(fwd_in.addr);
  assign fhit       = (lstate(fidx) != L_I) && (ltag[fidx] == tag_of(fwd_in.addr));
  assign fevb       = evb_valid && (evb_line == line_of(fwd_in.addr));
  assign fconf_pend = (line_of(fwd_in.addr) == line_of(cur_addr)) &&
                      ((ms == M_LOOKUP) || (ms == M_DATA && fwd_in.msg != FWD_INV));
  assign fconf_xmw  = resv_valid && (resv_line == line_of(fwd_in.addr)) &&
                      (!resv_lr || resv_age < 8'(LR_HOLD));
  assign f_inval    = fhit && (fwd_in.msg == FWD_GETM || fwd_in.msg == FWD_INV);
  assign fwd_stall  = fwd_in_valid && (fconf_pend || fconf_xmw);
  assign fwd_go     = fwd_in_valid && !fwd_stall && rsp_out_ready &&
                      (!f_inval || (!main_ac_v && ac_ready));
  assign fwd_in_ready = fwd_go;
  assign rsp_out_valid = fwd_in_valid && !fwd_stall && (!f_inval || (!main_ac_v && ac_ready));

  always_comb begin
    logic [LINE_W-1:0] d;
    logic              dirty;
    d     = fhit ? ldata[fidx] : evb_data;
    dirty = fhit ? (lstate(fidx) == L_M) : evb_dirty;
    if (fwd_in.msg == FWD_INV)
      rsp_out = mk_flit(fwd_in.src, my_xy, RSP_INVACK, fwd_in.addr, 8'd0, '0);
    else
      rsp_out = mk_flit(fwd_in.src, my_xy, RSP_FWD_DATA, fwd_in.addr, {7'd0, dirty}, d);
  end

  always_comb begin
    if (main_ac_v) begin
      ac_valid = 1'b1;
      ac       = main_ac;
    end else begin
      ac_valid   = fwd_in_valid && !fwd_stall && rsp_out_ready && f_inval;
      ac.addr    = {fwd_in.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
      ac.snoop   = ACSNOOP_MAKEINVALID;
      ac.prot    = lprot[fidx];
    end
  end

  assign rsp_in_ready = 1'b1;
  assign l1_flush     = (ms == F_L1);

  logic [IDX_W-1:0] fi;     // line being flushed
  assign fi = fl_idx[IDX_W-1:0];

  // ---------------- sequential ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lval         <= '0;
      ms           <= M_IDLE;
      cur_wr       <= 1'b0;
      cur_lock     <= 1'b0;
      cur_user     <= 1'b0;
      cur_prot     <= '0;
      cur_id       <= '0;
      cur_addr     <= '0;
      cur_wdata    <= '0;
      cur_wstrb    <= '0;
      rdata_q      <= '0;
      resp_q       <= '0;
      prio_wr      <= 1'b0;
      flush_pend   <= 1'b0;
      flush_done   <= 1'b0;
      fl_idx       <= '0;
      evb_valid    <= 1'b0;
      evb_line     <= '0;
      evb_data     <= '0;
      evb_dirty    <= 1'b0;
      resv_valid   <= 1'b0;
      resv_lr      <= 1'b0;
      resv_line    <= '0;
      resv_age     <= '0;
      req_q        <= '0;
      req_v        <= 1'b0;
      main_ac_sent <= 1'b0;
      n_fwd_served <= '0; n_fwd_stall_xmw <= '0; n_fwd_stall_pend <= '0;
      n_sc_ok <= '0; n_sc_fail <= '0; n_ac_sent <= '0; n_evict <= '0;
      n_amo_wr <= '0; n_fetch_in_resv <= '0;
    end else begin
      flush_done <= 1'b0;
      if (flush_req) flush_pend <= 1'b1;
      if (resv_valid && resv_age != 8'hFF) resv_age <= resv_age + 1;
      if (req_v && req_out_ready) req_v <= 1'b0;
      if (ac_valid && ac_ready) n_ac_sent <= n_ac_sent + 1;

      // ----- forwards (written first: the main machine wins a same-cycle
      // write to the same line, which is the newer event) -----
      if (fwd_stall && fconf_xmw) n_fwd_stall_xmw <= n_fwd_stall_xmw + 1;
      if (fwd_stall && fconf_pend) n_fwd_stall_pend <= n_fwd_stall_pend + 1;
      if (fwd_go) begin
        n_fwd_served <= n_fwd_served + 1;
        if (fhit) begin
          if (fwd_in.msg == FWD_GETS) lst[fidx] <= L_S;
          else                        lval[fidx] <= 1'b0;
        end
        if (resv_valid && resv_line == line_of(fwd_in.addr)) resv_valid <= 1'b0;
      end

      // ----- main machine -----
      case (ms)
        M_IDLE: begin
          if (flush_pend) begin
            ms <= F_L1;
          end else if (pick_wr || pick_rd) begin
            prio_wr   <= pick_rd;
            cur_wr    <= pick_wr;
            cur_id    <= pick_wr ? aw.id   : ar.id;
            cur_addr  <= pick_wr ? aw.addr : ar.addr;
            cur_lock  <= pick_wr ? aw.lock : ar.lock;
            cur_prot  <= pick_wr ? aw.prot : ar.prot;
            cur_user  <= pick_wr ? 1'b0    : ar.user;
            cur_wdata <= w.data;
            cur_wstrb <= w.strb;
            ms        <= M_LOOKUP;
          end
        end

        M_LOOKUP: begin
          if (!cur_lock && !cur_prot[2] && resv_valid) resv_valid <= 1'b0;
          if (cur_prot[2] && resv_valid) n_fetch_in_resv <= n_fetch_in_resv + 1;
          if (cur_wr && cur_lock) begin
            // AMO write or SC
            if (resv_valid && resv_line == line_of(cur_addr) && cst == L_M) begin
              ldata[cidx] <= merge(ldata[cidx], cur_wdata, cur_wstrb);
              resp_q      <= AXI_EXOKAY;
              if (resv_lr) n_sc_ok <= n_sc_ok + 1;
              else         n_amo_wr <= n_amo_wr + 1;
            end else begin
              resp_q    <= AXI_OKAY;
              n_sc_fail <= n_sc_fail + 1;
            end
            resv_valid <= 1'b0;
            ms         <= M_BRESP;
          end else if (need_m ? (cst == L_M || cst == L_E) : (cst != L_I)) begin
            // hit with enough permission
            if (cur_wr) begin
              ldata[cidx] <= merge(ldata[cidx], cur_wdata, cur_wstrb);
              lst[cidx]   <= L_M;
              resp_q      <= AXI_OKAY;
              ms          <= M_BRESP;
            end else begin
              if (cur_lock) begin
                lst[cidx]  <= L_M;
                resv_valid <= 1'b1;
                resv_age   <= '0;
                resv_lr    <= cur_user;
                resv_line  <= line_of(cur_addr);
              end
              rdata_q <= ldata[cidx];
              resp_q  <= AXI_OKAY;
              ms      <= M_RRESP;
            end
          end else if (!chit && lstate(cidx) != L_I) begin
            ms           <= M_EVICT;
            main_ac_sent <= 1'b0;
          end else begin
            ms <= M_GET;
          end
        end

        M_EVICT: begin
          // PUTS/PUTM to the home of the victim and MakeInvalid to the L1
          if (ac_ready) main_ac_sent <= 1'b1;
          if ((main_ac_sent || ac_ready) && !req_v) begin
            req_q <= mk_flit(home_of({ltag[cidx], cidx, {OFF_W{1'b0}}}), my_xy,
                             (lstate(cidx) == L_M) ? REQ_PUTM : REQ_PUTS,
                             {ltag[cidx], cidx, {OFF_W{1'b0}}}, 8'd0, ldata[cidx]);
            req_v     <= 1'b1;
            evb_valid <= 1'b1;
            evb_line  <= {ltag[cidx], cidx};
            evb_data  <= ldata[cidx];
            evb_dirty <= (lstate(cidx) == L_M);
            if (resv_valid && resv_line == {ltag[cidx], cidx}) resv_valid <= 1'b0;
            lval[cidx] <= 1'b0;
            n_evict   <= n_evict + 1;
            ms        <= M_PUTACK;
          end
        end

        M_PUTACK, F_ACK: begin
          if (rsp_in_valid && rsp_in.msg == RSP_PUTACK) begin
            evb_valid <= 1'b0;
            ms        <= (ms == M_PUTACK) ? M_GET : F_SCAN;
          end
        end

        M_GET: begin
          if (!req_v) begin
            req_q <= mk_flit(home_of(cur_addr), my_xy, need_m ? REQ_GETM : REQ_GETS,
                             {cur_addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}}, 8'd0, '0);
            req_v <= 1'b1;
            ms    <= M_DATA;
          end
        end

        M_DATA: begin
          if (rsp_in_valid && (rsp_in.msg == RSP_DATA_S || rsp_in.msg == RSP_DATA_E ||
                               rsp_in.msg == RSP_DATA_M)) begin
            lval[cidx]  <= 1'b1;
            lst[cidx]   <= (rsp_in.msg == RSP_DATA_S) ? L_S :
                           (rsp_in.msg == RSP_DATA_E) ? L_E : L_M;
            ltag[cidx]  <= tag_of(cur_addr);
            lprot[cidx] <= cur_prot;
            ldata[cidx] <= rsp_in.data;
            ms          <= M_LOOKUP;
          end
        end

        M_RRESP: if (r_ready) ms <= M_IDLE;
        M_BRESP: if (b_ready) ms <= M_IDLE;

        // ----- flush: L1 first, then every L2 line -----
        F_L1: if (l1_flush_done) begin
          fl_idx     <= '0;
          resv_valid <= 1'b0;
          ms         <= F_SCAN;
        end
        F_SCAN: begin
          if (fl_idx == (IDX_W+1)'(SETS)) begin
            ms <= F_DONE;
          end else begin
            if (lstate(fl_idx[IDX_W-1:0]) != L_I) ms <= F_PUT;
            else fl_idx <= fl_idx + 1'b1;
          end
        end
        F_PUT: begin
          if (!req_v) begin
            req_q <= mk_flit(home_of({ltag[fi], fi, {OFF_W{1'b0}}}), my_xy,
                             (lstate(fi) == L_M) ? REQ_PUTM : REQ_PUTS,
                             {ltag[fi], fi, {OFF_W{1'b0}}}, 8'd0, ldata[fi]);
            req_v     <= 1'b1;
            evb_valid <= 1'b1;
            evb_line  <= {ltag[fi], fi};
            evb_data  <= ldata[fi];
            evb_dirty <= (lstate(fi) == L_M);
            lval[fi]  <= 1'b0;
            fl_idx    <= fl_idx + 1'b1;
            n_evict   <= n_evict + 1;
            ms        <= F_ACK;
          end
        end
        F_DONE: begin
          flush_pend <= 1'b0;
          flush_done <= 1'b1;
          ms         <= M_IDLE;
        end
        default: ms <= M_IDLE;
      endcase
    end
  end

  // ---------------- protocol checks ----------------
  // A forward that is served must find the line either in the cache or in
  // the eviction buffer, except an invalidation of a line already dropped.
  a_fwd_has_data: assert property (@(posedge clk) disable iff (!rst_n)
    fwd_go && fwd_in.msg != FWD_INV |-> fhit || fevb);
  a_one_response: assert property (@(posedge clk) disable iff (!rst_n)
    !(r_valid && b_valid));

endmodule
