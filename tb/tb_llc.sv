// tb_llc: self-checking test of one LLC/directory slice.
//
// The LLC (16 sets, to force victim recalls) sits at tile (0,2) behind the
// behavioural DRAM model. The testbench plays the private L2s of tiles 1,
// 2 and 4: it sends requests on the request input and answers the LLC's
// forwards like an L2 would (RSP_FWD_DATA with the data it holds, marked
// dirty, or RSP_INVACK). Directed checks:
//   - a first GETS reads DRAM and grants E (line was V after the fill);
//   - GETS for a line owned in E/M sends FWD_GETS to the owner, returns
//     the owner's data as S and keeps both as sharers;
//   - GETM for a shared line sends FWD_INV to every other sharer, waits for
//     all INVACKs, then grants M;
//   - GETM for an owned line sends FWD_GETM and passes the owner's data;
//   - PUTM brings dirty data, PUTACK is sent, the line goes to V and the
//     next GETS is served from the LLC (no DRAM read);
//   - a miss on a set holding an owned line recalls it (FWD_GETM), writes
//     the dirty victim to DRAM, then fills the new line;
//   - DMA read burst of two lines (the set's owned victim is recalled
//     and written back first) and DMA write with acknowledge;
//   - flush writes every dirty line to DRAM, pulses flush_done, and the
//     next access reads DRAM again.
module tb_llc;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam coord_t ME = MEM0_XY;
  localparam int unsigned SETS = 16;

  logic  req_in_valid, req_in_ready, fwd_out_valid, fwd_out_ready;
  logic  rsp_in_valid, rsp_in_ready, rsp_out_valid, rsp_out_ready;
  logic  dma_in_valid, dma_in_ready, dma_out_valid, dma_out_ready;
  flit_t req_in, fwd_out, rsp_in, rsp_out, dma_in, dma_out;
  logic  flush_req, flush_done;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [LINE_W-1:0] mem_req_data, mem_rsp_data;

  llc #(.SETS(SETS)) dut (.clk, .rst_n, .my_xy(ME), .*);

  dram_model u_dram (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_data(mem_req_data),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

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
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- L2 models: answer forwards ----------------
  logic [LINE_W-1:0] held [logic [31:0]];   // data an owner holds (dirty)
  flit_t fwd_log [$];
  flit_t rsp_todo [$];
  assign fwd_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && fwd_out_valid) begin
    flit_t a;
    fwd_log.push_back(fwd_out);
    a = '0;
    a.la = P_L; a.dst = ME; a.src = fwd_out.dst; a.addr = fwd_out.addr;
    if (fwd_out.msg == FWD_INV) a.msg = RSP_INVACK;
    else begin
      a.msg  = RSP_FWD_DATA;
      a.aux  = 8'd1;
      a.data = held.exists(fwd_out.addr) ? held[fwd_out.addr] : '0;
    end
    rsp_todo.push_back(a);
  end
  initial begin
    rsp_in_valid = 1'b0;
    rsp_in = '0;
    forever begin
      @(negedge clk);
      rsp_in_valid = 1'b0;
      if (rsp_todo.size() != 0) begin
        repeat ($urandom_range(1, 4)) @(negedge clk);
        rsp_in = rsp_todo.pop_front();
        rsp_in_valid = 1'b1;
      end
    end
  end

  // ---------------- response collectors ----------------
  flit_t rsp_q [$];
  flit_t dma_q [$];
  assign rsp_out_ready = 1'b1;
  assign dma_out_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (rsp_out_valid) rsp_q.push_back(rsp_out);
    if (dma_out_valid) dma_q.push_back(dma_out);
  end

  task automatic req(int tile, msg_e m, logic [31:0] a, logic [LINE_W-1:0] d, output flit_t rsp);
    @(negedge clk);
    req_in = '{la: P_L, dst: ME, src: tile_coord(tile), msg: m, addr: a, aux: 8'd0, data: d};
    req_in_valid = 1'b1;
    do @(posedge clk); while (!req_in_ready);
    @(negedge clk) req_in_valid = 1'b0;
    while (rsp_q.size() == 0) @(posedge clk);
    rsp = rsp_q.pop_front();
    check(rsp.dst == tile_coord(tile) && rsp.src == ME, "response addressed to the requester");
  endtask

  task automatic dma(msg_e m, logic [31:0] a, int len, logic [LINE_W-1:0] d);
    @(negedge clk);
    dma_in = '{la: P_L, dst: ME, src: AUX_XY, msg: m, addr: a, aux: 8'(len), data: d};
    dma_in_valid = 1'b1;
    do @(posedge clk); while (!dma_in_ready);
    @(negedge clk) dma_in_valid = 1'b0;
  endtask

  function automatic logic [LINE_W-1:0] dram_init(logic [31:0] a);
    return {a[31:4], 4'd3, a[31:4], 4'd2, a[31:4], 4'd1, a[31:4], 4'd0};
  endfunction

  localparam logic [31:0] A = 32'h8000_0040;
  localparam logic [31:0] B = A + 32'(SETS * 16);      // same set as A
  localparam logic [31:0] C = 32'h8000_0080;

  initial begin
    flit_t  r;
    int     n0, f0;
    logic [LINE_W-1:0] d1, d2, d3;
    req_in_valid = 1'b0; req_in = '0; dma_in_valid = 1'b0; dma_in = '0; flush_req = 1'b0;
    d1 = {4{$urandom}}; d2 = {4{$urandom}}; d3 = {4{$urandom}};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // GETS, first touch
    n0 = u_dram.n_rd;
    req(1, REQ_GETS, A, '0, r);
    check(u_dram.n_rd == n0 + 1 && r.msg == RSP_DATA_E && r.data == dram_init(A),
          "first GETS: DRAM read, grant E");
    // GETS by tile 2 while tile 1 owns it (tile 1 wrote d1)
    held[A] = d1;
    f0 = fwd_log.size();
    req(2, REQ_GETS, A, '0, r);
    check(fwd_log.size() == f0 + 1 && fwd_log[f0].msg == FWD_GETS && fwd_log[f0].dst == tile_coord(1),
          "GETS on an owned line: FWD_GETS to the owner");
    check(r.msg == RSP_DATA_S && r.data == d1, "requester gets the owner's data in S");
    // GETM by tile 4: both sharers invalidated
    f0 = fwd_log.size();
    req(4, REQ_GETM, A, '0, r);
    check(fwd_log.size() == f0 + 2 && fwd_log[f0].msg == FWD_INV && fwd_log[f0 + 1].msg == FWD_INV &&
          fwd_log[f0].dst != fwd_log[f0 + 1].dst, "GETM on a shared line: FWD_INV to both sharers");
    check(r.msg == RSP_DATA_M && r.data == d1, "GETM granted M after the INVACKs");
    // GETM by tile 1 while tile 4 owns it
    held[A] = d2;
    f0 = fwd_log.size();
    req(1, REQ_GETM, A, '0, r);
    check(fwd_log.size() == f0 + 1 && fwd_log[f0].msg == FWD_GETM && fwd_log[f0].dst == tile_coord(4),
          "GETM on an owned line: FWD_GETM to the owner");
    check(r.msg == RSP_DATA_M && r.data == d2, "new owner gets the old owner's data");
    // PUTM by tile 1, then GETS from the LLC (state V)
    req(1, REQ_PUTM, A, d3, r);
    check(r.msg == RSP_PUTACK, "PUTM acknowledged");
    n0 = u_dram.n_rd;
    f0 = fwd_log.size();
    req(2, REQ_GETS, A, '0, r);
    check(u_dram.n_rd == n0 && fwd_log.size() == f0 && r.msg == RSP_DATA_E && r.data == d3,
          "line in V served by the LLC, no DRAM read, no forward");
    // miss on the same set: victim A (owned by tile 2, dirty d1) recalled and written back
    held[A] = d1;
    n0 = u_dram.n_wr;
    f0 = fwd_log.size();
    req(4, REQ_GETS, B, '0, r);
    check(fwd_log.size() == f0 + 1 && fwd_log[f0].msg == FWD_GETM && fwd_log[f0].addr == A,
          "victim recalled from its owner");
    check(u_dram.n_wr == n0 + 1 && u_dram.peek(A) == d1, "dirty victim written to DRAM");
    check(r.data == dram_init(B), "new line filled from DRAM");

    // DMA read burst of lines A and A+16. A's set holds B, owned by tile 4:
    // B is recalled and written back before A is read.
    held[B] = d2;
    f0 = fwd_log.size();
    n0 = u_dram.n_wr;
    dma(DMA_RD, A, 2, '0);
    while (dma_q.size() < 2) @(posedge clk);
    r = dma_q.pop_front();
    check(r.msg == DMA_DATA && r.data == d1 && r.dst == AUX_XY, "DMA read line 0");
    r = dma_q.pop_front();
    check(r.msg == DMA_DATA && r.data == dram_init(A + 16), "DMA read line 1 of the burst");
    check(fwd_log.size() == f0 + 1 && fwd_log[f0].addr == B && fwd_log[f0].dst == tile_coord(4),
          "owned victim recalled");
    check(u_dram.n_wr == n0 + 1 && u_dram.peek(B) == d2, "recalled dirty victim written back");
    // DMA write of C
    dma(DMA_WR, C, 1, d3);
    while (dma_q.size() < 1) @(posedge clk);
    r = dma_q.pop_front();
    check(r.msg == DMA_WRACK, "DMA write acknowledged");
    req(1, REQ_GETS, C, '0, r);
    check(r.data == d3, "core sees DMA-written data");

    // flush: A and A+16 are clean; C is dirty and owned by tile 1 (recalled)
    held[C] = d1;
    n0 = u_dram.n_wr;
    @(negedge clk) flush_req = 1'b1;
    @(negedge clk) flush_req = 1'b0;
    while (!flush_done) @(posedge clk) #1;
    check(u_dram.n_wr == n0 + 1, $sformatf("flush wrote %0d dirty lines", u_dram.n_wr - n0));
    check(u_dram.peek(C) == d1 && u_dram.peek(B) == d2, "flushed data in DRAM");
    n0 = u_dram.n_rd;
    req(2, REQ_GETS, C, '0, r);
    check(u_dram.n_rd == n0 + 1 && r.data == d1, "LLC empty after flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
