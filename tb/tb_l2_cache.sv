// tb_l2_cache: self-checking test of the private L2 cache and its
// coherence, atomics and flush behaviour.
//
// The L2 (16 sets, to force evictions) is driven from the CPU side over
// AXI and from the NoC side by a model of the home directory: it answers
// GETS with RSP_DATA_E or RSP_DATA_S, GETM with RSP_DATA_M, PUTS/PUTM with
// RSP_PUTACK after a chosen delay, and keeps a reference memory updated
// from PUTM data and dirty forward data. The test injects forwards itself.
// Directed checks:
//   - read miss sends GETS, the next read hits; write on E upgrades
//     silently, write on S sends GETM;
//   - FWD_GETS on an M line returns dirty data and leaves the line in S;
//     FWD_GETM and FWD_INV return data / INVACK and emit MakeInvalid on
//     the AC channel with the line's prot bits;
//   - a conflict eviction sends PUTM with data and MakeInvalid; a forward
//     that crosses the eviction (PUTACK delayed, MI_A) is answered from the
//     eviction buffer;
//   - AMO (locked read, user = 0): forwards stall until the locked write,
//     which gets EXOKAY, then are served;
//   - LR: a forward is held at most LR_HOLD cycles, then served, and the
//     following SC gets OKAY and does not write; LR then SC gets EXOKAY; an
//     instruction fetch between LR and SC keeps the reservation, a data
//     read ends it;
//   - flush: l1_flush first, then one PUT per valid line, then flush_done.
module tb_l2_cache;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  localparam coord_t ME = '{x: 3'd1, y: 3'd0};
  localparam int unsigned SETS = 16;
  localparam int unsigned HOLD = 32;

  logic    ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready;
  logic    b_valid, b_ready, ac_valid, ac_ready;
  axi_ar_t ar;
  axi_r_t  r;
  axi_aw_t aw;
  axi_w_t  w;
  axi_b_t  b;
  ace_ac_t ac;
  logic    flush_req, flush_done, l1_flush, l1_flush_done;
  logic    req_out_valid, req_out_ready, fwd_in_valid, fwd_in_ready;
  logic    rsp_in_valid, rsp_in_ready, rsp_out_valid, rsp_out_ready;
  flit_t   req_out, fwd_in, rsp_in, rsp_out;

  l2_cache #(.SETS(SETS), .LR_HOLD(HOLD)) dut (.clk, .rst_n, .my_xy(ME), .*);

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- directory model ----------------
  logic [LINE_W-1:0] mem [logic [27:0]];
  function automatic logic [LINE_W-1:0] mline(logic [31:0] a);
    if (mem.exists(a[31:4])) return mem[a[31:4]];
    return {a[31:4], 4'd3, a[31:4], 4'd2, a[31:4], 4'd1, a[31:4], 4'd0};
  endfunction

  int    n_gets = 0, n_getm = 0, n_puts = 0, n_putm = 0;
  msg_e  gets_grant = RSP_DATA_E;
  int    putack_delay = 0;
  flit_t last_req;
  bit    home_ok = 1;

  assign req_out_ready = 1'b1;
  initial begin
    rsp_in_valid = 1'b0;
    rsp_in = '0;
    forever begin
      @(posedge clk);
      if (rst_n && req_out_valid) begin
        flit_t q, a;
        q = req_out;
        last_req = q;
        if (q.dst != home_of(q.addr) || q.src != ME) home_ok = 0;
        a = '0;
        a.dst = ME; a.src = q.dst; a.addr = q.addr; a.la = P_L;
        case (q.msg)
          REQ_GETS: begin n_gets++; a.msg = gets_grant; a.data = mline(q.addr); end
          REQ_GETM: begin n_getm++; a.msg = RSP_DATA_M; a.data = mline(q.addr); end
          REQ_PUTM: begin n_putm++; mem[q.addr[31:4]] = q.data; a.msg = RSP_PUTACK; end
          default:  begin n_puts++; a.msg = RSP_PUTACK; end
        endcase
        if (a.msg == RSP_PUTACK) repeat (putack_delay) @(posedge clk);
        repeat (2) @(posedge clk);
        @(negedge clk);
        rsp_in = a;
        rsp_in_valid = 1'b1;
        @(negedge clk) rsp_in_valid = 1'b0;
      end
    end
  end

  // AC channel and forward responses are recorded
  assign ac_ready      = 1'b1;
  assign rsp_out_ready = 1'b1;
  int      n_ac = 0;
  ace_ac_t last_ac;
  flit_t   last_rsp;
  int      n_rsp = 0;
  always @(posedge clk) if (rst_n) begin
    if (ac_valid) begin n_ac++; last_ac <= ac; end
    if (rsp_out_valid) begin
      n_rsp++;
      last_rsp <= rsp_out;
      if (rsp_out.msg == RSP_FWD_DATA && rsp_out.aux[0]) mem[rsp_out.addr[31:4]] = rsp_out.data;
    end
  end

  // L1 flush model
  int n_l1_flush = 0;
  initial begin
    l1_flush_done = 1'b0;
    forever begin
      @(posedge clk);
      if (l1_flush) begin
        n_l1_flush++;
        repeat (3) @(posedge clk);
        @(negedge clk) l1_flush_done = 1'b1;
        @(negedge clk) l1_flush_done = 1'b0;
        wait (!l1_flush);
      end
    end
  end

  // ---------------- CPU side ----------------
  task automatic rd(logic [31:0] a, logic lock, logic user, logic [2:0] prot,
                    output logic [LINE_W-1:0] d);
    @(negedge clk);
    ar = '{id: prot[2] ? 2'b10 : 2'b00, addr: a, lock: lock, prot: prot, user: user};
    ar_valid = 1'b1;
    do @(posedge clk); while (!ar_ready);
    @(negedge clk) ar_valid = 1'b0;
    r_ready = 1'b1;
    do @(posedge clk); while (!r_valid);
    d = r.data;
    @(negedge clk) r_ready = 1'b0;
  endtask

  task automatic wr(logic [31:0] a, logic [63:0] d, logic lock, output logic [1:0] resp);
    @(negedge clk);
    aw = '{id: 2'b01, addr: a, lock: lock, prot: 3'b000, atop: ATOP_NONE};
    w  = '{data: {2{d}}, strb: a[3] ? 16'hFF00 : 16'h00FF};
    aw_valid = 1'b1; w_valid = 1'b1;
    do @(posedge clk); while (!aw_ready);
    @(negedge clk) begin aw_valid = 1'b0; w_valid = 1'b0; end
    b_ready = 1'b1;
    do @(posedge clk); while (!b_valid);
    resp = b.resp;
    @(negedge clk) b_ready = 1'b0;
  endtask

  // Inject a forward; wait at most max_wait cycles for it to be taken.
  task automatic fwd(msg_e m, logic [31:0] a, int max_wait, output int waited);
    @(negedge clk);
    fwd_in = '{la: P_L, dst: ME, src: '{x: 3'd0, y: 3'd2}, msg: m,
               addr: {a[31:4], 4'h0}, aux: 8'd0, data: '0};
    fwd_in_valid = 1'b1;
    waited = 0;
    @(posedge clk);
    while (!fwd_in_ready && waited < max_wait) begin @(posedge clk); waited++; end
    @(negedge clk) if (waited >= max_wait) waited = -1;
    fwd_in_valid = 1'b0;
  endtask

  function automatic logic [63:0] word(logic [LINE_W-1:0] l, logic [31:0] a);
    return a[3] ? l[127:64] : l[63:0];
  endfunction

  localparam logic [31:0] X = 32'h8000_0040;         // set 4
  localparam logic [31:0] Y = X + 32'(SETS * 16);    // same set as X
  localparam logic [31:0] Z = 32'h9000_0080;         // set 8, home mem tile 1

  initial begin
    logic [LINE_W-1:0] d;
    logic [1:0] resp;
    int n0, n1, wt;
    ar_valid = 1'b0; aw_valid = 1'b0; w_valid = 1'b0; r_ready = 1'b0; b_ready = 1'b0;
    ar = '0; aw = '0; w = '0; fwd_in_valid = 1'b0; fwd_in = '0; flush_req = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- read miss / hit, silent upgrade, GETM from S ----
    rd(X, 0, 0, 3'b000, d);
    check(n_gets == 1 && d == mline(X), "read miss: GETS, data returned");
    rd(X + 8, 0, 0, 3'b000, d);
    check(n_gets == 1 && d == mline(X), "read hit: no request");
    wr(X, 64'h1111, 0, resp);
    check(n_getm == 0 && resp == AXI_OKAY, "write on E: silent upgrade to M");
    gets_grant = RSP_DATA_S;
    rd(Z, 0, 0, 3'b000, d);
    check(last_req.dst == home_of(Z), "request sent to the home of the address");
    wr(Z, 64'h2222, 0, resp);
    check(n_getm == 1, "write on S: GETM");
    gets_grant = RSP_DATA_E;
    check(home_ok, "every request addressed to its home tile");

    // ---- FWD_GETS on M ----
    n0 = n_rsp;
    fwd(FWD_GETS, X, 10, wt);
    repeat (2) @(posedge clk);
    check(wt >= 0 && n_rsp == n0 + 1 && last_rsp.msg == RSP_FWD_DATA && last_rsp.aux[0] &&
          word(last_rsp.data, X) == 64'h1111 && last_rsp.dst == '{x: 3'd0, y: 3'd2},
          "FWD_GETS on M: dirty data to the requester");
    n0 = n_getm;
    wr(X, 64'h1112, 0, resp);
    check(n_getm == n0 + 1, "line went to S: write needs GETM");

    // ---- FWD_GETM and FWD_INV ----
    n0 = n_ac;
    fwd(FWD_GETM, X, 10, wt);
    repeat (2) @(posedge clk);
    check(last_rsp.msg == RSP_FWD_DATA && word(last_rsp.data, X) == 64'h1112,
          "FWD_GETM: data to the requester");
    check(n_ac == n0 + 1 && last_ac.addr == X && last_ac.snoop == ACSNOOP_MAKEINVALID &&
          last_ac.prot == 3'b000, "FWD_GETM: MakeInvalid on AC");
    rd(X, 0, 0, 3'b100, d);                        // instruction fetch: prot[2] = 1
    n0 = n_ac;
    fwd(FWD_INV, X, 10, wt);
    repeat (2) @(posedge clk);
    check(last_rsp.msg == RSP_INVACK, "FWD_INV: INVACK");
    check(n_ac == n0 + 1 && last_ac.prot[2], "MakeInvalid carries the instruction prot bit");

    // ---- eviction with a forward crossing it ----
    rd(X, 0, 0, 3'b000, d);
    wr(X, 64'h3333, 0, resp);
    putack_delay = 20;
    n0 = n_putm;
    n1 = n_ac;
    fork
      rd(Y, 0, 0, 3'b000, d);
      begin
        wait (n_putm == n0 + 1);
        fwd(FWD_GETM, X, 10, wt);
        repeat (2) @(posedge clk);
        check(wt >= 0 && last_rsp.msg == RSP_FWD_DATA && word(last_rsp.data, X) == 64'h3333,
              "forward during MI_A answered from the eviction buffer");
      end
    join
    putack_delay = 0;
    check(n_putm == n0 + 1 && word(mline(X), X) == 64'h3333, "eviction: PUTM with data");
    check(n_ac >= n1 + 1, "eviction: MakeInvalid to the L1");
    check(d == mline(Y), "miss after eviction served");

    // ---- AMO: forwards stalled until the locked write ----
    rd(X, 1, 0, 3'b000, d);                        // locked read, user = 0
    fwd(FWD_GETS, X, 60, wt);
    check(wt == -1, "forward stalled during AMO (XMW)");
    fork
      begin
        fwd(FWD_GETS, X, 200, wt);
        check(wt >= 0, "forward served after AMO write");
      end
      begin
        repeat (5) @(posedge clk);
        wr(X, 64'h4444, 1, resp);
        check(resp == AXI_EXOKAY, "AMO write: EXOKAY");
      end
    join
    repeat (2) @(posedge clk);
    check(word(last_rsp.data, X) == 64'h4444, "forward after AMO sees the AMO result");

    // ---- LR: forward held at most LR_HOLD, then SC fails ----
    rd(Z, 1, 1, 3'b000, d);
    n0 = int'(cycle);
    fwd(FWD_GETM, Z, 200, wt);
    check(wt >= 0 && wt <= int'(HOLD) + 2, $sformatf("forward during LR served after %0d cycles", wt));
    wr(Z, 64'h5555, 1, resp);
    check(resp == AXI_OKAY, "SC after a served forward fails (OKAY)");
    rd(Z, 0, 0, 3'b000, d);
    check(word(d, Z) != 64'h5555, "failed SC did not write");
    // LR, SC: success
    rd(Z, 1, 1, 3'b000, d);
    wr(Z, 64'h6666, 1, resp);
    check(resp == AXI_EXOKAY, "LR then SC succeeds (EXOKAY)");
    rd(Z, 0, 0, 3'b000, d);
    check(word(d, Z) == 64'h6666, "successful SC wrote");
    // fetch between LR and SC keeps the reservation
    rd(Z, 1, 1, 3'b000, d);
    rd(32'h8000_0100, 0, 0, 3'b100, d);
    wr(Z, 64'h7777, 1, resp);
    check(resp == AXI_EXOKAY, "instruction fetch inside LR/SC keeps the reservation");
    // data read between LR and SC ends it
    rd(Z, 1, 1, 3'b000, d);
    rd(32'h8000_0200, 0, 0, 3'b000, d);
    wr(Z, 64'h8888, 1, resp);
    check(resp == AXI_OKAY, "data read inside LR/SC ends the reservation");

    // ---- flush ----
    n0 = n_puts + n_putm;
    @(negedge clk) flush_req = 1'b1;
    @(negedge clk) flush_req = 1'b0;
    while (!flush_done) @(posedge clk) #1;
    check(n_l1_flush == 1, "flush starts with the L1");
    // lines present: X (S after the FWD_GETS; it evicted Y), Z, and
    // 0x8000_0200 (it evicted 0x8000_0100, same set)
    check(n_puts + n_putm == n0 + 3, $sformatf("flush wrote back every line (%0d)", n_puts + n_putm - n0));
    check(word(mline(Z), Z) == 64'h7777, "flush wrote back dirty data");
    n0 = n_gets;
    rd(Y, 0, 0, 3'b000, d);
    check(n_gets == n0 + 1, "cache empty after flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
