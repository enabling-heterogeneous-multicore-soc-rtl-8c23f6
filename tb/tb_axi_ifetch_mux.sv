// tb_axi_ifetch_mux: self-checking test of the instruction/data AXI merger.
//
// A data master and an instruction master issue random reads at the same
// time; a slave model answers each read after a random delay with data
// derived from the address and the request's prot bits. Checks:
//   - every read returns to the master that issued it, with its data;
//   - instruction reads leave with prot[2] = 1 and id[1] = 1, data reads
//     with prot[2] = 0 and id[1] = 0;
//   - when both masters wait, the grants alternate (round robin);
//   - writes pass through unchanged.
module tb_axi_ifetch_mux;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic    d_ar_valid, d_ar_ready, d_r_valid, d_r_ready, d_aw_valid, d_aw_ready;
  logic    d_w_valid, d_w_ready, d_b_valid, d_b_ready;
  axi_ar_t d_ar;
  axi_r_t  d_r;
  axi_aw_t d_aw;
  axi_w_t  d_w;
  axi_b_t  d_b;
  logic              i_ar_valid, i_ar_ready, i_r_valid, i_r_ready;
  logic [ADDR_W-1:0] i_ar_addr;
  logic [LINE_W-1:0] i_r_data;
  logic    m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_aw_valid, m_aw_ready;
  logic    m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  axi_ar_t m_ar;
  axi_r_t  m_r;
  axi_aw_t m_aw;
  axi_w_t  m_w;
  axi_b_t  m_b;

  axi_ifetch_mux dut (.*);

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

  function automatic logic [LINE_W-1:0] mem(logic [31:0] a, logic ifetch);
    return {a, ~a, a ^ 32'h5A5A_5A5A, 31'd0, ifetch};
  endfunction

  // ---- slave: one read at a time, random latency ----
  int n_both = 0, n_alt = 0;
  logic last_i;
  always @(posedge clk) if (rst_n && m_ar_valid && m_ar_ready) begin
    checks++;
    if ((m_ar.prot[2] != m_ar.id[1])) begin
      failures++;
      $display("FAIL: prot[2] and id[1] disagree");
    end
    if (d_ar_valid && i_ar_valid) begin
      n_both++;
      if (m_ar.id[1] != last_i) n_alt++;
    end
    last_i <= m_ar.id[1];
  end

  initial begin
    axi_ar_t q;
    m_ar_ready = 1'b0;
    m_r_valid  = 1'b0;
    m_r        = '0;
    @(posedge rst_n);
    forever begin
      @(negedge clk) m_ar_ready = 1'b1;
      do @(posedge clk); while (!m_ar_valid);
      q = m_ar;
      @(negedge clk) m_ar_ready = 1'b0;
      repeat ($urandom_range(0, 4)) @(posedge clk);
      @(negedge clk);
      m_r_valid = 1'b1;
      m_r = '{id: q.id, data: mem(q.addr, q.prot[2]), resp: AXI_OKAY};
      do @(posedge clk); while (!m_r_ready);
      @(negedge clk) m_r_valid = 1'b0;
    end
  end

  // ---- masters ----
  int d_done = 0, i_done = 0;
  localparam int N = 100;
  initial begin
    d_ar_valid = 1'b0; d_ar = '0; d_r_ready = 1'b0;
    @(posedge rst_n);
    for (int k = 0; k < N; k++) begin
      logic [31:0] a;
      a = $urandom & 32'hFFFF_FFF0;
      @(negedge clk);
      d_ar_valid = 1'b1;
      d_ar = '{id: 2'($urandom), addr: a, lock: 1'b0, prot: 3'b011, user: 1'b0};
      do @(posedge clk); while (!d_ar_ready);
      @(negedge clk) d_ar_valid = 1'b0;
      d_r_ready = 1'b1;
      do @(posedge clk); while (!d_r_valid);
      check(d_r.data == mem(a, 1'b0), "data read returns its line, not an instruction read");
      @(negedge clk) d_r_ready = 1'b0;
    end
    d_done = 1;
  end
  initial begin
    i_ar_valid = 1'b0; i_ar_addr = '0; i_r_ready = 1'b0;
    @(posedge rst_n);
    for (int k = 0; k < N; k++) begin
      logic [31:0] a;
      a = $urandom & 32'hFFFF_FFF0;
      @(negedge clk);
      i_ar_valid = 1'b1;
      i_ar_addr  = a;
      do @(posedge clk); while (!i_ar_ready);
      @(negedge clk) i_ar_valid = 1'b0;
      i_r_ready = 1'b1;
      do @(posedge clk); while (!i_r_valid);
      check(i_r_data == mem(a, 1'b1), "instruction read returns its line with prot[2] set");
      @(negedge clk) i_r_ready = 1'b0;
    end
    i_done = 1;
  end

  initial begin
    d_aw_valid = 1'b0; d_w_valid = 1'b0; d_b_ready = 1'b0; d_aw = '0; d_w = '0;
    m_aw_ready = 1'b0; m_w_ready = 1'b0; m_b_valid = 1'b0; m_b = '0;
    last_i = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // write pass-through
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      d_aw_valid = 1'($urandom); d_w_valid = 1'($urandom); d_b_ready = 1'($urandom);
      m_aw_ready = 1'($urandom); m_w_ready = 1'($urandom); m_b_valid = 1'($urandom);
      d_aw = '{id: 2'($urandom), addr: $urandom, lock: 1'($urandom), prot: 3'($urandom), atop: 6'($urandom)};
      d_w  = '{data: {4{$urandom}}, strb: 16'($urandom)};
      m_b  = '{id: 2'($urandom), resp: 2'($urandom)};
      #1;
      check(m_aw_valid == d_aw_valid && m_aw == d_aw && d_aw_ready == m_aw_ready, "AW passes");
      check(m_w_valid == d_w_valid && m_w == d_w && d_w_ready == m_w_ready, "W passes");
      check(d_b_valid == m_b_valid && d_b == m_b && m_b_ready == d_b_ready, "B passes");
    end
    @(negedge clk);
    d_aw_valid = 1'b0; d_w_valid = 1'b0; m_b_valid = 1'b0;
    wait (d_done != 0 && i_done != 0);
    check(n_both > 10, $sformatf("both masters contended (%0d times)", n_both));
    check(n_alt >= n_both - 1, $sformatf("round robin under contention (%0d of %0d)", n_alt, n_both));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
