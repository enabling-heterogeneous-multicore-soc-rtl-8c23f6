// dcache_inval: data-cache invalidate unit on the ACE snoop address (AC)
// channel.
//
// It accepts one AC transaction per cycle (ac_ready is always high). A
// MakeInvalid is turned into a lookup on the data cache's dedicated
// invalidation port (lk_valid/lk_addr) in the same cycle; the cache answers
// with lk_hit and, on a hit, invalidates the line at the clock edge. A miss
// is ignored. Other snoop codes are dropped. n_hits/n_misses count the
// outcomes for observation.
// Timing: the line is gone one clock edge after the AC handshake.
// The unit, its AC input and its dedicated lookup port follow the paper
// (wt_dcache_inval); the counters are this design's addition.
module dcache_inval
  import esp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ac_valid,
  output logic              ac_ready,
  input  ace_ac_t           ac,
  output logic              lk_valid,
  output logic [ADDR_W-1:0] lk_addr,
  input  logic              lk_hit,
  output logic [15:0]       n_hits,
  output logic [15:0]       n_misses
);

  assign ac_ready = 1'b1;
  assign lk_valid = ac_valid && (ac.snoop == ACSNOOP_MAKEINVALID);
  assign lk_addr  = {ac.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_hits   <= '0;
      n_misses <= '0;
    end else if (lk_valid) begin
      if (lk_hit) n_hits   <= n_hits + 1'b1;
      else        n_misses <= n_misses + 1'b1;
    end
  end

  // ac.prot is used by the demultiplexer in front of this unit only
  logic unused_prot;
  assign unused_prot = ^ac.prot;

endmodule
