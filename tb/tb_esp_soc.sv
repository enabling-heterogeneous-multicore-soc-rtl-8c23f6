// tb_esp_soc: end-to-end test of the 3x3 SoC at its default sizes
// (32 KiB L1, 64 KiB L2, 512 KiB LLC slices).
//
// Four core drivers issue loads, stores, AMOs and LR/SC through the
// processor tiles' data ports; a fetch driver reads instruction lines;
// two behavioural DRAMs sit behind the memory tiles; the auxiliary tile
// ports are used as a host that writes flush registers, sends an
// interrupt and issues DMA. Expected values are computed here from the
// sequence of operations. Every mechanism of the design is counted and a
// mechanism that never occurred counts as a failure:
//   FWD_GETS, FWD_GETM, FWD_INV, L1 invalidation hit (dcache_inval),
//   invalidation routed to the instruction cache, forward stalled by an
//   open AMO (XMW), SC success and SC failure, fetch served inside an LR/SC
//   pair, L2 eviction, LLC hit in V, LLC victim write-back, L1+L2 flush,
//   LLC flush, DMA read and write, interrupt.
module tb_esp_soc;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  // ---------------- DUT ----------------
  logic [3:0]        core_req_valid, core_req_ready, core_rsp_valid;
  core_req_t         core_req [4];
  core_rsp_t         core_rsp [4];
  logic [3:0]        fetch_valid, fetch_ready, fetch_rsp_valid;
  logic [ADDR_W-1:0] fetch_addr [4];
  logic [LINE_W-1:0] fetch_rsp_data [4];
  logic [3:0]        ic_inval_valid, irq;
  ace_ac_t           ic_inval [4];
  logic [1:0]        mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr [2];
  logic [LINE_W-1:0] mem_req_data [2];
  logic [LINE_W-1:0] mem_rsp_data [2];
  logic [5:0]        aux_tx_valid, aux_tx_ready, aux_rx_valid;
  flit_t             aux_tx [6];
  flit_t             aux_rx [6];

  logic      cv [4];
  core_req_t cq [4];
  logic      fv [4];
  for (genvar c = 0; c < 4; c++) begin : g_drv
    assign core_req_valid[c] = cv[c];
    assign core_req[c]       = cq[c];
    assign fetch_valid[c]    = fv[c];
  end

  esp_soc dut (
    .clk, .rst_n,
    .core_req_valid, .core_req_ready, .core_req, .core_rsp_valid, .core_rsp,
    .fetch_valid, .fetch_ready, .fetch_addr, .fetch_rsp_valid, .fetch_rsp_data,
    .ic_inval_valid, .ic_inval_ready(4'hF), .ic_inval, .irq,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_data,
    .mem_rsp_valid, .mem_rsp_data,
    .aux_tx_valid, .aux_tx_ready, .aux_tx,
    .aux_rx_valid, .aux_rx_ready(6'h3F), .aux_rx
  );

  for (genvar m = 0; m < 2; m++) begin : g_dram
    dram_model u_dram (
      .clk, .req_valid(mem_req_valid[m]), .req_ready(mem_req_ready[m]),
      .req_we(mem_req_we[m]), .req_addr(mem_req_addr[m]), .req_data(mem_req_data[m]),
      .rsp_valid(mem_rsp_valid[m]), .rsp_data(mem_rsp_data[m])
    );
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- helpers ----------------
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic logic [63:0] init_word(logic [31:0] a);
    logic [31:0] la = {a[31:4], 4'h0};
    logic [3:0]  w  = 4'({a[3], 1'b0});
    return {la[31:4], w + 4'd1, la[31:4], w};
  endfunction

  task automatic core_op(int c, core_op_e op, logic [31:0] a, logic [63:0] wd,
                         logic [5:0] atop, output logic [63:0] rd, output logic scf);
    @(negedge clk);
    cq[c] = '{op: op, addr: a, wdata: wd, be: 8'hFF, atop: atop};
    cv[c] = 1'b1;
    do @(posedge clk); while (!core_req_ready[c]);
    @(negedge clk);
    cv[c] = 1'b0;
    while (!core_rsp_valid[c]) @(posedge clk) #1;
    rd  = core_rsp[c].rdata;
    scf = core_rsp[c].sc_fail;
    @(posedge clk);
  endtask

  task automatic ld(int c, logic [31:0] a, output logic [63:0] rd);
    logic f;
    core_op(c, CORE_LD, a, '0, '0, rd, f);
  endtask
  task automatic st(int c, logic [31:0] a, logic [63:0] wd);
    logic [63:0] d;
    logic f;
    core_op(c, CORE_ST, a, wd, '0, d, f);
  endtask

  task automatic fetch(int c, logic [31:0] a, output logic [LINE_W-1:0] d);
    @(negedge clk);
    fetch_addr[c] = a;
    fv[c] = 1'b1;
    do @(posedge clk); while (!fetch_ready[c]);
    @(negedge clk);
    fv[c] = 1'b0;
    while (!fetch_rsp_valid[c]) @(posedge clk) #1;
    d = fetch_rsp_data[c];
    @(posedge clk);
  endtask

  // aux tile host: send one flit on a plane, wait for one reply flit
  flit_t rx_q [6][$];
  always @(posedge clk)
    for (int p = 0; p < 6; p++)
      if (aux_rx_valid[p]) rx_q[p].push_back(aux_rx[p]);

  task automatic aux_send(int p, coord_t dst, msg_e m, logic [31:0] a, logic [7:0] x,
                          logic [LINE_W-1:0] d);
    @(negedge clk);
    aux_tx[p] = '{la: P_L, dst: dst, src: AUX_XY, msg: m, addr: a, aux: x, data: d};
    aux_tx_valid[p] = 1'b1;
    do @(posedge clk); while (!aux_tx_ready[p]);
    @(negedge clk);
    aux_tx_valid[p] = 1'b0;
  endtask

  task automatic aux_recv(int p, output flit_t f);
    while (rx_q[p].size() == 0) @(posedge clk);
    f = rx_q[p].pop_front();
  endtask

  // ---------------- mechanism counters (from inside the design) ----------------
  int unsigned n_ic_inval = 0, n_irq = 0;
  always @(posedge clk) begin
    for (int c = 0; c < 4; c++) if (ic_inval_valid[c]) n_ic_inval++;
    if (irq != 4'h0) n_irq++;
  end

  // ---------------- test ----------------
  localparam logic [31:0] A0 = 32'h8000_0100;   // home: memory tile 0
  localparam logic [31:0] A1 = 32'h9000_0200;   // home: memory tile 1
  localparam logic [31:0] CNT_AMO = 32'h8000_1000;
  localparam logic [31:0] CNT_LRSC = 32'h9000_2000;
  localparam int unsigned N_AMO = 12, N_LRSC = 8;
  localparam logic [5:0] ATOP_ADD = {ATOP_LOAD, 1'b0, AMO_ADD};

  logic [63:0] rd;
  logic        scf;
  logic [LINE_W-1:0] line;
  flit_t       f;
  int unsigned sc_fail_seen = 0;
  logic [63:0] amo_seen [4][N_AMO];

  // counters read from the design
  int unsigned s_fwd_gets, s_fwd_getm, s_inv, s_l1_hits, s_xmw, s_sc_ok, s_sc_fail,
               s_fetch_resv, s_evict, s_v_hits, s_dram_wr, s_flush_l1, s_dma;

  // one core doing N_AMO atomic increments
  task automatic amo_worker(int c);
    logic [63:0] r;
    logic ff;
    for (int i = 0; i < int'(N_AMO); i++) begin
      core_op(c, CORE_AMO, CNT_AMO, 64'd1, ATOP_ADD, r, ff);
      amo_seen[c][i] = r;
    end
  endtask

  // one core doing N_LRSC LR/SC increments, retrying failed SCs
  task automatic lrsc_worker(int c);
    logic [63:0] r, dmy;
    logic ff;
    for (int i = 0; i < int'(N_LRSC); i++) begin
      ff = 1'b1;
      while (ff) begin
        core_op(c, CORE_LR, CNT_LRSC, '0, '0, r, ff);
        core_op(c, CORE_SC, CNT_LRSC, r + 1, '0, dmy, ff);
        if (ff) sc_fail_seen++;
      end
    end
  endtask

  initial begin
    for (int c = 0; c < 4; c++) begin
      cv[c] = 1'b0; cq[c] = '0; fv[c] = 1'b0; fetch_addr[c] = '0;
    end
    aux_tx_valid = '0;
    for (int p = 0; p < 6; p++) aux_tx[p] = '0;
    s_flush_l1 = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    $display("[%0d] part 1", cycle);
    // 1. first touch reads DRAM; store then load on one core
    ld(0, A0, rd);
    check(rd == init_word(A0), "cold load returns DRAM contents");
    st(0, A0, 64'hA5A5_0000_0000_0001);
    ld(0, A0, rd);
    check(rd == 64'hA5A5_0000_0000_0001, "load after store, same core");
    $display("[%0d] part 2", cycle);
    // 2. another core reads a line owned in M: FWD_GETS
    ld(1, A0, rd);
    check(rd == 64'hA5A5_0000_0000_0001, "load by core 1 sees core 0's store");
    ld(1, A0, rd);                               // L1 hit in core 1
    $display("[%0d] part 3", cycle);
    // 3. core 0 writes again: core 1 is a sharer -> FWD_INV -> AC -> L1 invalidation
    st(0, A0, 64'hA5A5_0000_0000_0002);
    ld(1, A0, rd);
    check(rd == 64'hA5A5_0000_0000_0002, "core 1 L1 copy invalidated, sees new value");
    $display("[%0d] part 4", cycle);
    // 4. memory tile 1 partition, write by 3 read by 2, then write by 2 (FWD_GETM)
    st(3, A1 + 8, 64'h1111_2222_3333_4444);
    ld(2, A1 + 8, rd);
    check(rd == 64'h1111_2222_3333_4444, "memory tile 1 line shared between cores");
    st(2, A1, 64'h5555);
    st(3, A1, 64'h6666);
    ld(2, A1, rd);
    check(rd == 64'h6666, "ownership moved twice (FWD_GETM)");
    ld(2, A1 + 8, rd);
    check(rd == 64'h1111_2222_3333_4444, "other word of the line preserved");

    $display("[%0d] part 5", cycle);
    // 5. AMO ADD from all cores at once
    st(0, CNT_AMO, 64'd0);
    fork
      amo_worker(0);
      amo_worker(1);
      amo_worker(2);
      amo_worker(3);
    join
    ld(1, CNT_AMO, rd);
    check(rd == 64'(4 * N_AMO), $sformatf("AMO ADD total %0d", rd));
    begin
      // every old value 0..4N-1 returned exactly once
      bit seen [4*N_AMO];
      bit dup;
      dup = 0;
      for (int i = 0; i < int'(4*N_AMO); i++) seen[i] = 0;
      for (int c = 0; c < 4; c++)
        for (int i = 0; i < int'(N_AMO); i++)
          if (amo_seen[c][i] >= 64'(4*N_AMO) || seen[int'(amo_seen[c][i])]) dup = 1;
          else seen[int'(amo_seen[c][i])] = 1;
      check(!dup, "AMO old values are distinct: atomicity held");
    end

    $display("[%0d] part 6", cycle);
    // 6. LR/SC increments from all cores at once
    st(3, CNT_LRSC, 64'd100);
    fork
      lrsc_worker(0);
      lrsc_worker(1);
      lrsc_worker(2);
      lrsc_worker(3);
    join
    ld(0, CNT_LRSC, rd);
    check(rd == 64'(100 + 4 * N_LRSC), $sformatf("LR/SC total %0d", rd));

    $display("[%0d] part 7", cycle);
    // 7. instruction fetch between LR and SC does not break the reservation
    core_op(1, CORE_LR, CNT_LRSC, '0, '0, rd, scf);
    fetch(1, 32'h8000_4000, line);
    check(line[63:0] == init_word(32'h8000_4000), "fetch inside LR/SC returns code line");
    core_op(1, CORE_SC, CNT_LRSC, rd + 1, '0, rd, scf);
    check(!scf, "SC after fetch succeeds");
    // a data load that reaches the L2 (L1 miss) between LR and SC ends the reservation
    core_op(1, CORE_LR, CNT_LRSC, '0, '0, rd, scf);
    ld(1, 32'h8000_7000, rd);
    core_op(1, CORE_SC, CNT_LRSC, 64'd7, '0, rd, scf);
    check(scf, "SC after a data load fails");
    ld(2, CNT_LRSC, rd);
    check(rd == 64'(100 + 4 * N_LRSC + 1), "failed SC did not write");

    $display("[%0d] part 8", cycle);
    // 8. other AMO operations on one word
    st(2, 32'h8000_5000, 64'd50);
    core_op(2, CORE_AMO, 32'h8000_5000, 64'd80, {ATOP_LOAD, 1'b0, AMO_UMAX}, rd, scf);
    check(rd == 64'd50, "AMOMAXU returns old value");
    core_op(2, CORE_AMO, 32'h8000_5000, 64'hF0, {ATOP_LOAD, 1'b0, AMO_CLR}, rd, scf);
    core_op(2, CORE_AMO, 32'h8000_5000, 64'd9, ATOP_SWAP, rd, scf);
    check(rd == (64'd80 & ~64'hF0), "AMOAND (CLR of inverted) then SWAP");
    ld(3, 32'h8000_5000, rd);
    check(rd == 64'd9, "AMOSWAP result visible to another core");

    $display("[%0d] part 9", cycle);
    // 9. instruction line invalidation routed to the instruction cache
    fetch(0, 32'h8000_6000, line);
    st(3, 32'h8000_6000, 64'hC0DE);
    fetch(0, 32'h8000_6000, line);
    check(line[63:0] == 64'hC0DE, "fetch after remote write sees new code");

    $display("[%0d] part 10", cycle);
    // 10. L2 evictions (64 KiB stride) and LLC victim write-back (512 KiB stride)
    for (int i = 0; i < 3; i++) st(2, 32'h8001_0100 + 32'(i) * 32'h0001_0000, 64'(i + 7));
    for (int i = 0; i < 3; i++) st(2, 32'h8008_0300 + 32'(i) * 32'h0008_0000, 64'(i + 70));
    for (int i = 0; i < 3; i++) begin
      ld(0, 32'h8001_0100 + 32'(i) * 32'h0001_0000, rd);
      check(rd == 64'(i + 7), "line evicted from L2 keeps its data");
      ld(1, 32'h8008_0300 + 32'(i) * 32'h0008_0000, rd);
      check(rd == 64'(i + 70), "line evicted from LLC comes back from DRAM");
    end

    $display("[%0d] part 11", cycle);
    // 11. L2 flush of core 0 (and its L1) through the socket register
    s_flush_l1 = 0;
    fork
      begin
        aux_send(5, tile_coord(1), IO_WR, 32'h0, REG_L2_FLUSH, '0);
        aux_recv(5, f);
        check(f.msg == IO_ACK && f.src == tile_coord(1), "L2 flush acknowledged");
      end
      begin
        wait (dut.g_cpu[0].u_tile.l1_flush_done);
        s_flush_l1++;
      end
    join
    ld(0, A0, rd);
    check(rd == 64'hA5A5_0000_0000_0002, "data survives L2 flush");

    $display("[%0d] part 12", cycle);
    // 12. DMA: read burst of two lines (one owned in M by a core), write a line
    st(1, CNT_AMO + 16, 64'hD0D0);
    aux_send(3, MEM0_XY, DMA_RD, CNT_AMO, 8'd2, '0);
    aux_recv(4, f);
    check(f.msg == DMA_DATA && f.data[63:0] == 64'(4 * N_AMO), "DMA read line 0");
    aux_recv(4, f);
    check(f.msg == DMA_DATA && f.data[63:0] == 64'hD0D0, "DMA read recalls line owned by a core");
    aux_send(3, MEM1_XY, DMA_WR, 32'h9000_3000, 8'd1, {64'hBEEF_0001, 64'hBEEF_0000});
    aux_recv(4, f);
    check(f.msg == DMA_WRACK, "DMA write acknowledged");
    ld(3, 32'h9000_3008, rd);
    check(rd == 64'hBEEF_0001, "core sees DMA-written data");

    $display("[%0d] part 13", cycle);
    // 13. LLC flush of memory tile 0: dirty lines reach DRAM
    aux_send(5, MEM0_XY, IO_WR, 32'h0, REG_LLC_FLUSH, '0);
    aux_recv(5, f);
    check(f.msg == IO_ACK && f.src == MEM0_XY, "LLC flush acknowledged");
    check(g_dram[0].u_dram.peek(A0)[63:0] == 64'hA5A5_0000_0000_0002, "flushed line is in DRAM");
    ld(2, A0, rd);
    check(rd == 64'hA5A5_0000_0000_0002, "load after LLC flush");

    $display("[%0d] part 14", cycle);
    // 14. interrupt through the IO plane
    aux_send(5, tile_coord(4), IO_IRQ, 32'h0, 8'h0, 128'd1);
    repeat (20) @(posedge clk);
    check(irq == 4'b0100, "interrupt level set in processor tile 2");

    // ---------------- mechanism coverage ----------------
    s_fwd_gets = dut.g_mem[0].u_tile.u_llc.n_fwd_gets + dut.g_mem[1].u_tile.u_llc.n_fwd_gets;
    s_fwd_getm = dut.g_mem[0].u_tile.u_llc.n_fwd_getm + dut.g_mem[1].u_tile.u_llc.n_fwd_getm;
    s_inv      = dut.g_mem[0].u_tile.u_llc.n_inv + dut.g_mem[1].u_tile.u_llc.n_inv;
    s_v_hits   = dut.g_mem[0].u_tile.u_llc.n_v_hits + dut.g_mem[1].u_tile.u_llc.n_v_hits;
    s_dram_wr  = dut.g_mem[0].u_tile.u_llc.n_dram_wr + dut.g_mem[1].u_tile.u_llc.n_dram_wr;
    s_dma      = dut.g_mem[0].u_tile.u_llc.n_dma_lines + dut.g_mem[1].u_tile.u_llc.n_dma_lines;
    s_l1_hits  = 32'(dut.g_cpu[0].u_tile.inv_hits) + 32'(dut.g_cpu[1].u_tile.inv_hits) +
                 32'(dut.g_cpu[2].u_tile.inv_hits) + 32'(dut.g_cpu[3].u_tile.inv_hits);
    s_xmw = 0; s_sc_ok = 0; s_sc_fail = 0; s_fetch_resv = 0; s_evict = 0;
    s_xmw        += dut.g_cpu[0].u_tile.u_l2.n_fwd_stall_xmw + dut.g_cpu[1].u_tile.u_l2.n_fwd_stall_xmw
                  + dut.g_cpu[2].u_tile.u_l2.n_fwd_stall_xmw + dut.g_cpu[3].u_tile.u_l2.n_fwd_stall_xmw;
    s_sc_ok      += dut.g_cpu[0].u_tile.u_l2.n_sc_ok + dut.g_cpu[1].u_tile.u_l2.n_sc_ok
                  + dut.g_cpu[2].u_tile.u_l2.n_sc_ok + dut.g_cpu[3].u_tile.u_l2.n_sc_ok;
    s_sc_fail    += dut.g_cpu[0].u_tile.u_l2.n_sc_fail + dut.g_cpu[1].u_tile.u_l2.n_sc_fail
                  + dut.g_cpu[2].u_tile.u_l2.n_sc_fail + dut.g_cpu[3].u_tile.u_l2.n_sc_fail;
    s_fetch_resv += dut.g_cpu[0].u_tile.u_l2.n_fetch_in_resv + dut.g_cpu[1].u_tile.u_l2.n_fetch_in_resv
                  + dut.g_cpu[2].u_tile.u_l2.n_fetch_in_resv + dut.g_cpu[3].u_tile.u_l2.n_fetch_in_resv;
    s_evict      += dut.g_cpu[0].u_tile.u_l2.n_evict + dut.g_cpu[1].u_tile.u_l2.n_evict
                  + dut.g_cpu[2].u_tile.u_l2.n_evict + dut.g_cpu[3].u_tile.u_l2.n_evict;
    $display("mechanisms: FWD_GETS=%0d FWD_GETM=%0d FWD_INV=%0d L1_inval_hit=%0d icache_inval=%0d",
             s_fwd_gets, s_fwd_getm, s_inv, s_l1_hits, n_ic_inval);
    $display("            XMW_stall=%0d SC_ok=%0d SC_fail=%0d (core saw %0d) fetch_in_LRSC=%0d",
             s_xmw, s_sc_ok, s_sc_fail, sc_fail_seen, s_fetch_resv);
    $display("            L2_evict=%0d LLC_V_hit=%0d DRAM_writeback=%0d L1_flush=%0d DMA_lines=%0d irq=%0d",
             s_evict, s_v_hits, s_dram_wr, s_flush_l1, s_dma, n_irq);
    check(s_fwd_gets > 0, "FWD_GETS occurred");
    check(s_fwd_getm > 0, "FWD_GETM occurred");
    check(s_inv > 0, "FWD_INV occurred");
    check(s_l1_hits > 0, "L1 invalidation hit occurred");
    check(n_ic_inval > 0, "instruction-cache invalidation occurred");
    check(s_xmw > 0, "forward stalled by open AMO (XMW) occurred");
    check(s_sc_ok > 0, "SC success occurred");
    check(s_sc_fail > 0, "SC failure occurred");
    check(s_fetch_resv > 0, "fetch inside LR/SC occurred");
    check(s_evict > 0, "L2 eviction occurred");
    check(s_v_hits > 0, "LLC hit in V occurred");
    check(s_dram_wr > 0, "LLC write-back occurred");
    check(s_flush_l1 > 0, "L1 flush occurred");
    check(s_dma >= 3, "DMA lines served");
    check(n_irq > 0, "interrupt occurred");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
