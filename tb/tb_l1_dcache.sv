// tb_l1_dcache: self-checking test of the write-through L1 data cache.
//
// An AXI slave model holds a memory of lines, counts the reads it serves,
// answers with a random delay, and answers a locked write (SC) with EXOKAY
// or OKAY as chosen by the test. A random mix of loads and stores to a
// small address pool (which also forces conflict misses) is checked against
// a reference memory; then directed tests check:
//   - a load hit causes no AXI read, a miss causes exactly one;
//   - the invalidation port reports hit/miss and the next load misses;
//   - an invalidation that lands while the line is being refilled keeps
//     the line from being installed;
//   - flush empties the cache and pulses flush_done;
//   - AMO leaves as AW with ATOP, returns the old value, drops the line;
//   - LR is a locked AR with user = 1; SC is a locked AW with ATOP = 0 and
//     rsp.rdata is 0 on EXOKAY, 1 (and sc_fail) on OKAY.
module tb_l1_dcache;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic      req_valid, req_ready, rsp_valid;
  core_req_t req;
  core_rsp_t rsp;
  logic              inv_valid, inv_hit, flush, flush_done;
  logic [ADDR_W-1:0] inv_addr;
  logic    ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready;
  logic    w_valid, w_ready, b_valid, b_ready;
  axi_ar_t ar;
  axi_r_t  r;
  axi_aw_t aw;
  axi_w_t  w;
  axi_b_t  b;

  l1_dcache #(.SETS(64)) dut (.*);

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- AXI slave model ----------------
  logic [LINE_W-1:0] mem [logic [27:0]];
  int      n_ar = 0, n_aw = 0;
  axi_ar_t last_ar;
  axi_aw_t last_aw;
  logic [1:0] sc_resp = AXI_EXOKAY;
  int      r_delay = -1;       // fixed read delay when >= 0

  function automatic logic [LINE_W-1:0] rd_line(logic [31:0] a);
    if (mem.exists(a[31:4])) return mem[a[31:4]];
    return {a[31:4], 4'd3, a[31:4], 4'd2, a[31:4], 4'd1, a[31:4], 4'd0};
  endfunction

  initial begin
    ar_ready = 1'b0; r_valid = 1'b0; r = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk) ar_ready = 1'b1;
      do @(posedge clk); while (!ar_valid);
      last_ar = ar;
      n_ar++;
      @(negedge clk) ar_ready = 1'b0;
      repeat (r_delay >= 0 ? r_delay : $urandom_range(0, 4)) @(posedge clk);
      @(negedge clk);
      r_valid = 1'b1;
      r = '{id: last_ar.id, data: rd_line(last_ar.addr), resp: AXI_OKAY};
      do @(posedge clk); while (!r_ready);
      @(negedge clk) r_valid = 1'b0;
    end
  end

  initial begin
    axi_w_t wq;
    logic [LINE_W-1:0] l, old;
    aw_ready = 1'b0; w_ready = 1'b0; b_valid = 1'b0; b = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk) aw_ready = 1'b1;
      do @(posedge clk); while (!aw_valid);
      last_aw = aw;
      n_aw++;
      @(negedge clk) begin aw_ready = 1'b0; w_ready = 1'b1; end
      do @(posedge clk); while (!w_valid);
      wq = w;
      @(negedge clk) w_ready = 1'b0;
      old = rd_line(last_aw.addr);
      l = old;
      if (last_aw.atop != ATOP_NONE) begin
        // AMO: this model only implements SWAP of the 64-bit word
        for (int i = 0; i < LINE_B; i++) if (wq.strb[i]) l[i*8 +: 8] = wq.data[i*8 +: 8];
      end else if (!last_aw.lock || sc_resp == AXI_EXOKAY) begin
        for (int i = 0; i < LINE_B; i++) if (wq.strb[i]) l[i*8 +: 8] = wq.data[i*8 +: 8];
      end
      mem[last_aw.addr[31:4]] = l;
      if (last_aw.atop != ATOP_NONE) begin
        @(negedge clk);
        r_valid = 1'b1;
        r = '{id: last_aw.id, data: old, resp: AXI_OKAY};
        do @(posedge clk); while (!r_ready);
        @(negedge clk) r_valid = 1'b0;
      end
      @(negedge clk);
      b_valid = 1'b1;
      b = '{id: last_aw.id, resp: last_aw.lock ? sc_resp : AXI_OKAY};
      do @(posedge clk); while (!b_ready);
      @(negedge clk) b_valid = 1'b0;
    end
  end

  // ---------------- core driver ----------------
  task automatic op(core_op_e o, logic [31:0] a, logic [63:0] wd, logic [5:0] atop,
                    output core_rsp_t rs);
    @(negedge clk);
    req = '{op: o, addr: a, wdata: wd, be: 8'hFF, atop: atop};
    req_valid = 1'b1;
    do @(posedge clk); while (!req_ready);
    @(negedge clk) req_valid = 1'b0;
    while (!rsp_valid) @(posedge clk) #1;
    rs = rsp;
    @(posedge clk);
  endtask

  function automatic logic [63:0] ref_word(logic [31:0] a);
    logic [LINE_W-1:0] l;
    l = rd_line(a);
    return a[3] ? l[127:64] : l[63:0];
  endfunction

  task automatic inv(logic [31:0] a, output logic hit);
    @(negedge clk);
    inv_valid = 1'b1;
    inv_addr  = a;
    #1 hit = inv_hit;
    @(negedge clk) inv_valid = 1'b0;
  endtask

  initial begin
    core_rsp_t rs;
    logic h;
    int n0;
    req_valid = 1'b0; req = '0; inv_valid = 1'b0; inv_addr = '0; flush = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- random loads/stores against the reference ----
    for (int k = 0; k < 600; k++) begin
      logic [31:0] a;
      // 16 lines in 4 sets apart by SETS lines: conflict misses
      a = {16'h8000, 2'($urandom), 6'd0, 2'($urandom), 2'b00, 1'($urandom), 3'b000} | 32'h0000_0400 * 32'($urandom_range(0, 3));
      if ($urandom_range(0, 2) == 0) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        op(CORE_ST, a, d, '0, rs);
        check(ref_word(a) == d, "store written through");
      end else begin
        op(CORE_LD, a, '0, '0, rs);
        check(rs.rdata == ref_word(a), $sformatf("load %h", a));
      end
    end

    // ---- hit / miss ----
    op(CORE_LD, 32'h9000_0010, '0, '0, rs);
    n0 = n_ar;
    op(CORE_LD, 32'h9000_0018, '0, '0, rs);
    check(n_ar == n0, "load hit: no AXI read");
    check(rs.rdata == ref_word(32'h9000_0018), "load hit data");

    // ---- invalidation port ----
    inv(32'h9000_0010, h);
    check(h, "invalidation port: hit on present line");
    inv(32'h9000_0010, h);
    check(!h, "invalidation port: line now absent");
    inv(32'hA000_0010, h);
    check(!h, "invalidation port: miss on another tag");
    n0 = n_ar;
    op(CORE_LD, 32'h9000_0010, '0, '0, rs);
    check(n_ar == n0 + 1, "load after invalidation misses");

    // ---- invalidation during refill ----
    r_delay = 6;
    fork
      op(CORE_LD, 32'h9000_0100, '0, '0, rs);
      begin
        wait (ar_valid && ar_ready);
        repeat (2) @(posedge clk);
        inv(32'h9000_0100, h);
      end
    join
    r_delay = -1;
    check(rs.rdata == ref_word(32'h9000_0100), "refill data returned to the core");
    n0 = n_ar;
    op(CORE_LD, 32'h9000_0100, '0, '0, rs);
    check(n_ar == n0 + 1, "line invalidated during refill was not installed");

    // ---- flush ----
    op(CORE_LD, 32'h9000_0200, '0, '0, rs);
    @(negedge clk) flush = 1'b1;
    while (!flush_done) @(posedge clk) #1;
    @(negedge clk) flush = 1'b0;
    check(1'b1, "flush_done pulsed");
    n0 = n_ar;
    op(CORE_LD, 32'h9000_0200, '0, '0, rs);
    op(CORE_LD, 32'h9000_0100, '0, '0, rs);
    check(n_ar == n0 + 2, "flush emptied the cache");

    // ---- AMO ----
    op(CORE_LD, 32'h9000_0300, '0, '0, rs);
    begin
      logic [63:0] old;
      old = ref_word(32'h9000_0300);
      op(CORE_AMO, 32'h9000_0300, 64'h1234, ATOP_SWAP, rs);
      check(last_aw.atop == ATOP_SWAP && !last_aw.lock, "AMO leaves as AW with ATOP");
      check(rs.rdata == old, "AMO returns the old value");
      n0 = n_ar;
      op(CORE_LD, 32'h9000_0300, '0, '0, rs);
      check(n_ar == n0 + 1 && rs.rdata == 64'h1234, "AMO dropped the L1 line; load sees result");
    end

    // ---- LR / SC ----
    op(CORE_LR, 32'h9000_0400, '0, '0, rs);
    check(last_ar.lock && last_ar.user, "LR is a locked AR with user = 1");
    sc_resp = AXI_EXOKAY;
    op(CORE_SC, 32'h9000_0400, 64'h55, '0, rs);
    check(last_aw.lock && last_aw.atop == ATOP_NONE, "SC is a locked AW");
    check(rs.rdata == 0 && !rs.sc_fail, "SC success reported as 0");
    check(ref_word(32'h9000_0400) == 64'h55, "successful SC wrote");
    op(CORE_LR, 32'h9000_0400, '0, '0, rs);
    sc_resp = AXI_OKAY;
    op(CORE_SC, 32'h9000_0400, 64'h66, '0, rs);
    check(rs.rdata == 1 && rs.sc_fail, "SC failure reported as 1");
    op(CORE_LD, 32'h9000_0400, '0, '0, rs);
    check(rs.rdata == 64'h55, "failed SC did not write");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
