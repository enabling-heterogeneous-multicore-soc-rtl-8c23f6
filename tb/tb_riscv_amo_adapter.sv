// tb_riscv_amo_adapter: self-checking test of the RISC-V atomics adapter.
//
// The upstream side is driven like the L1 would: AMOs as one AW with ATOP
// plus W, plain reads and writes, LR (locked AR, user = 1) and SC (locked
// AW, ATOP = 0). The downstream side is a model of the L2 holding a small
// memory of lines; it records the attributes of every request it sees and
// answers a locked write with a B response chosen at random (EXOKAY or
// OKAY), as the L2 does for an SC that keeps or lost its reservation.
// Checks:
//   - each AMO (all nine operations, 32-bit and 64-bit, both halves of the
//     line) returns the old value on R, and memory holds the value computed
//     by an independent reference model;
//   - the AMO reaches the L2 as a locked AR with user = 0 followed by a
//     locked AW with ATOP = 0;
//   - LR reaches the L2 with lock and user set; SC with lock set and ATOP 0;
//   - the SC's B response is passed through unchanged (EXOKAY / OKAY);
//   - plain reads and writes pass through.
module tb_riscv_amo_adapter;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic    s_ar_valid, s_ar_ready, s_r_valid, s_r_ready, s_aw_valid, s_aw_ready;
  logic    s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  axi_ar_t s_ar;
  axi_r_t  s_r;
  axi_aw_t s_aw;
  axi_w_t  s_w;
  axi_b_t  s_b;
  logic    m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_aw_valid, m_aw_ready;
  logic    m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  axi_ar_t m_ar;
  axi_r_t  m_r;
  axi_aw_t m_aw;
  axi_w_t  m_w;
  axi_b_t  m_b;

  riscv_amo_adapter dut (.*);

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

  // ---------------- L2 model ----------------
  logic [LINE_W-1:0] mem [16];
  axi_ar_t last_ar;
  axi_aw_t last_aw;
  logic [1:0] sc_resp;          // B response the model gives to a locked write
  int n_ar = 0, n_aw = 0;

  function automatic int li(logic [31:0] a);
    return int'(a[7:4]);
  endfunction

  initial begin
    m_ar_ready = 1'b0; m_r_valid = 1'b0; m_r = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk) m_ar_ready = 1'b1;
      do @(posedge clk); while (!m_ar_valid);
      last_ar = m_ar;
      n_ar++;
      @(negedge clk) m_ar_ready = 1'b0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      @(negedge clk);
      m_r_valid = 1'b1;
      m_r = '{id: last_ar.id, data: mem[li(last_ar.addr)], resp: AXI_OKAY};
      do @(posedge clk); while (!m_r_ready);
      @(negedge clk) m_r_valid = 1'b0;
    end
  end
  initial begin
    axi_w_t wq;
    m_aw_ready = 1'b0; m_w_ready = 1'b0; m_b_valid = 1'b0; m_b = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk) begin m_aw_ready = 1'b1; m_w_ready = 1'b0; end
      do @(posedge clk); while (!m_aw_valid);
      last_aw = m_aw;
      n_aw++;
      @(negedge clk) begin m_aw_ready = 1'b0; m_w_ready = 1'b1; end
      do @(posedge clk); while (!m_w_valid);
      wq = m_w;
      @(negedge clk) m_w_ready = 1'b0;
      if (!last_aw.lock || sc_resp == AXI_EXOKAY)
        for (int b = 0; b < LINE_B; b++)
          if (wq.strb[b]) mem[li(last_aw.addr)][b*8 +: 8] = wq.data[b*8 +: 8];
      repeat ($urandom_range(0, 3)) @(posedge clk);
      @(negedge clk);
      m_b_valid = 1'b1;
      m_b = '{id: last_aw.id, resp: last_aw.lock ? sc_resp : AXI_OKAY};
      do @(posedge clk); while (!m_b_ready);
      @(negedge clk) m_b_valid = 1'b0;
    end
  end

  // ---------------- reference ALU ----------------
  function automatic logic [63:0] ref_alu(logic [5:0] atop, logic [63:0] a, logic [63:0] b, bit w32);
    longint sa, sb;
    longint unsigned ua, ub;
    logic [63:0] r;
    if (w32) begin
      sa = longint'(int'(a[31:0])); sb = longint'(int'(b[31:0]));
      ua = {32'd0, a[31:0]};        ub = {32'd0, b[31:0]};
    end else begin
      sa = a; sb = b; ua = a; ub = b;
    end
    if (atop == ATOP_SWAP) r = b;
    else case (atop[2:0])
      3'd0: r = a + b;
      3'd1: r = a & ~b;
      3'd2: r = a ^ b;
      3'd3: r = a | b;
      3'd4: r = (sa > sb) ? a : b;
      3'd5: r = (sa < sb) ? a : b;
      3'd6: r = (ua > ub) ? a : b;
      default: r = (ua < ub) ? a : b;
    endcase
    return w32 ? {32'd0, r[31:0]} : r;
  endfunction

  // ---------------- upstream driver ----------------
  task automatic up_write(axi_aw_t aw, axi_w_t w, output axi_b_t b, output axi_r_t r, input bit want_r);
    @(negedge clk);
    s_aw = aw; s_w = w;
    s_aw_valid = 1'b1; s_w_valid = 1'b1;
    fork
      begin do @(posedge clk); while (!s_aw_ready); @(negedge clk) s_aw_valid = 1'b0; end
      begin do @(posedge clk); while (!s_w_ready);  @(negedge clk) s_w_valid  = 1'b0; end
    join
    fork
      begin
        s_b_ready = 1'b1;
        do @(posedge clk); while (!s_b_valid);
        b = s_b;
        @(negedge clk) s_b_ready = 1'b0;
      end
      if (want_r) begin
        s_r_ready = 1'b1;
        do @(posedge clk); while (!s_r_valid);
        r = s_r;
        @(negedge clk) s_r_ready = 1'b0;
      end
    join
  endtask

  task automatic up_read(axi_ar_t ar, output axi_r_t r);
    @(negedge clk);
    s_ar = ar; s_ar_valid = 1'b1;
    do @(posedge clk); while (!s_ar_ready);
    @(negedge clk) s_ar_valid = 1'b0;
    s_r_ready = 1'b1;
    do @(posedge clk); while (!s_r_valid);
    r = s_r;
    @(negedge clk) s_r_ready = 1'b0;
  endtask

  localparam logic [5:0] OPS [9] = '{6'h20, 6'h21, 6'h22, 6'h23, 6'h24, 6'h25, 6'h26, 6'h27, ATOP_SWAP};

  initial begin
    axi_b_t b;
    axi_r_t r;
    int n_amo_ok;
    n_amo_ok = 0;
    s_ar_valid = 1'b0; s_aw_valid = 1'b0; s_w_valid = 1'b0; s_r_ready = 1'b0; s_b_ready = 1'b0;
    s_ar = '0; s_aw = '0; s_w = '0;
    sc_resp = AXI_EXOKAY;
    for (int i = 0; i < 16; i++) mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- AMOs ----
    for (int k = 0; k < 200; k++) begin
      logic [31:0] a;
      logic [5:0]  op;
      bit          w32, hi;
      logic [63:0] opnd, old, exp_new, got_new;
      logic [LINE_W-1:0] prev_line;
      axi_aw_t aw;
      axi_w_t  w;
      op  = OPS[$urandom_range(0, 8)];
      w32 = 1'($urandom);
      a   = {24'h800000, 4'($urandom), 1'($urandom), w32 ? 1'($urandom) : 1'b0, 2'b00};
      hi  = w32 && a[2];
      opnd = {$urandom, $urandom};
      if ($urandom_range(0, 3) == 0) opnd[63] = 1'b1;   // exercise the signed compares
      prev_line = mem[li(a)];
      old = a[3] ? prev_line[127:64] : prev_line[63:0];
      if (hi) old = {32'd0, old[63:32]};
      else if (w32) old = {32'd0, old[31:0]};
      exp_new = ref_alu(op, old, w32 ? {32'd0, opnd[31:0]} : opnd, w32);
      aw = '{id: 2'd1, addr: a, lock: 1'b0, prot: 3'b000, atop: op};
      w.data = {2{hi ? {opnd[31:0], 32'd0} : opnd}};
      w.strb = a[3] ? {(w32 ? (hi ? 8'hF0 : 8'h0F) : 8'hFF), 8'h00}
                    : {8'h00, (w32 ? (hi ? 8'hF0 : 8'h0F) : 8'hFF)};
      up_write(aw, w, b, r, 1'b1);
      got_new = a[3] ? mem[li(a)][127:64] : mem[li(a)][63:0];
      if (hi) got_new = {32'd0, got_new[63:32]};
      else if (w32) got_new = {32'd0, got_new[31:0]};
      begin
        logic [63:0] rold;
        rold = a[3] ? r.data[127:64] : r.data[63:0];
        if (hi) rold = {32'd0, rold[63:32]};
        else if (w32) rold = {32'd0, rold[31:0]};
        check(rold == old, $sformatf("AMO %h returns old value", op));
      end
      check(got_new == exp_new, $sformatf("AMO %h w32=%0d result %h expected %h", op, w32, got_new, exp_new));
      check(last_ar.lock && !last_ar.user, "AMO read is locked, not an LR");
      check(last_aw.lock && last_aw.atop == ATOP_NONE, "AMO write is locked, plain");
      check(b.resp == AXI_OKAY && r.id == 2'd1 && b.id == 2'd1, "AMO responses carry the id");
      // other bytes of the line unchanged
      begin
        logic [LINE_W-1:0] mask;
        for (int i = 0; i < LINE_B; i++) mask[i*8 +: 8] = w.strb[i] ? 8'h00 : 8'hFF;
        check((mem[li(a)] & mask) == (prev_line & mask), "AMO leaves other bytes");
      end
    end

    // ---- LR / SC / plain ----
    for (int k = 0; k < 40; k++) begin
      logic [31:0] a;
      axi_w_t w;
      a = {24'h800000, 4'($urandom), 4'h0};
      up_read('{id: 2'd0, addr: a, lock: 1'b1, prot: 3'b000, user: 1'b1}, r);
      check(last_ar.lock && last_ar.user, "LR passes with lock and user");
      check(r.data == mem[li(a)], "LR data");
      sc_resp = ($urandom_range(0, 1) != 0) ? AXI_EXOKAY : AXI_OKAY;
      w = '{data: {4{$urandom}}, strb: 16'h00FF};
      up_write('{id: 2'd0, addr: a, lock: 1'b1, prot: 3'b000, atop: ATOP_NONE}, w, b, r, 1'b0);
      check(last_aw.lock && last_aw.atop == ATOP_NONE, "SC passes as a locked write");
      check(b.resp == sc_resp, "SC response passed through unchanged");
      up_write('{id: 2'd0, addr: a, lock: 1'b0, prot: 3'b000, atop: ATOP_NONE}, w, b, r, 1'b0);
      check(!last_aw.lock && mem[li(a)][63:0] == w.data[63:0], "plain write passes");
      up_read('{id: 2'd0, addr: a, lock: 1'b0, prot: 3'b000, user: 1'b0}, r);
      check(!last_ar.lock && r.data == mem[li(a)], "plain read passes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
