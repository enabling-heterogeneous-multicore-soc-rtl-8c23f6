// tb_dcache_inval: self-checking test of the data-cache invalidation unit.
//
// A model of the L1 tag lookup answers lk_hit for a random set of line
// addresses. Random AC requests, MakeInvalid and other snoop types, are
// driven. Checks: the unit is always ready, a lookup is issued exactly for
// MakeInvalid requests, the lookup address is the line address (offset
// cleared), and the hit/miss counters match the model's count.
module tb_dcache_inval;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              ac_valid, ac_ready, lk_valid, lk_hit;
  ace_ac_t           ac;
  logic [ADDR_W-1:0] lk_addr;
  logic [15:0]       n_hits, n_misses;

  dcache_inval dut (.*);

  // model of the L1 tags: lines whose address bit 4 is set are present
  assign lk_hit = lk_valid && lk_addr[4];

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

  initial begin
    int hits, misses;
    hits = 0; misses = 0;
    ac_valid = 1'b0;
    ac = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      ac_valid = 1'($urandom);
      ac.addr  = $urandom;
      ac.snoop = ($urandom_range(0, 3) == 0) ? 4'b0000 : ACSNOOP_MAKEINVALID;
      ac.prot  = 3'($urandom);
      #1;
      check(ac_ready, "always ready");
      check(lk_valid == (ac_valid && ac.snoop == ACSNOOP_MAKEINVALID), "lookup only for MakeInvalid");
      if (lk_valid) begin
        check(lk_addr == {ac.addr[31:4], 4'h0}, "lookup address is the line address");
        if (ac.addr[4]) hits++; else misses++;
      end
    end
    @(negedge clk);
    ac_valid = 1'b0;
    @(posedge clk); #1;
    check(32'(n_hits) == hits, $sformatf("hit counter %0d, expected %0d", n_hits, hits));
    check(32'(n_misses) == misses, $sformatf("miss counter %0d, expected %0d", n_misses, misses));
    check(hits > 20 && misses > 20, "hits and misses both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
