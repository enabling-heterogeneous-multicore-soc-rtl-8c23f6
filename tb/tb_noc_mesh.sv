// tb_noc_mesh: self-checking test of one 3x3 NoC plane.
//
// Phase 1 measures the latency of a lone flit on an empty mesh for every
// source/destination pair and checks it grows by exactly one cycle per hop
// (the single-cycle hop of the routers).
// Phase 2 lets all nine tiles inject random traffic to random destinations
// at the same time, with random back-pressure at the destinations, and
// checks every flit arrives once, unchanged, at the right tile, and that
// flits of one source/destination pair stay in order (XY routing is
// deterministic).
module tb_noc_mesh;
  import esp_pkg::*;

  localparam int NT = NOC_X * NOC_Y;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  logic [NT-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t         in_flit  [NT];
  flit_t         out_flit [NT];

  noc_mesh dut (
    .clk, .rst_n,
    .loc_in_valid(in_valid), .loc_in_flit(in_flit), .loc_in_ready(in_ready),
    .loc_out_valid(out_valid), .loc_out_flit(out_flit), .loc_out_ready(out_ready)
  );

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

  function automatic flit_t mk(int s, int d, int seq);
    flit_t f;
    f      = '0;
    f.src  = tile_coord(s);
    f.dst  = tile_coord(d);
    f.msg  = RSP_DATA_S;
    f.addr = $urandom;
    f.aux  = 8'(seq);
    f.data = {64'($urandom), 32'(seq), 16'(s), 16'(d)};
    return f;
  endfunction

  flit_t exp_q [NT][NT][$];
  int    got = 0, sent = 0;
  bit    phase2 = 0;
  int    done_src = 0;

  // destination side: checker (phase 2 uses random back-pressure)
  always @(negedge clk) out_ready <= phase2 ? NT'($urandom) : '1;
  always @(posedge clk) if (rst_n && phase2) begin
    for (int d = 0; d < NT; d++) if (out_valid[d] && out_ready[d]) begin
      int s;
      flit_t e;
      s = int'(out_flit[d].data[31:16]);
      got++;
      checks++;
      if (int'(out_flit[d].data[15:0]) != d || s >= NT || exp_q[s][d].size() == 0) begin
        failures++;
        $display("FAIL: flit delivered to wrong tile %0d", d);
      end else begin
        e = exp_q[s][d].pop_front();
        if (out_flit[d].data != e.data || out_flit[d].addr != e.addr ||
            out_flit[d].src != e.src || out_flit[d].dst != e.dst || out_flit[d].la != P_L) begin
          failures++;
          $display("FAIL: tile %0d got a wrong or reordered flit from %0d", d, s);
        end
      end
    end
  end

  // phase 2 sources
  localparam int NPKT = 60;
  for (genvar s = 0; s < NT; s++) begin : g_src
    initial begin
      int n;
      n = 0;
      wait (phase2);
      while (n < NPKT) begin
        @(negedge clk);
        if (!in_valid[s]) begin
          int d;
          d = $urandom_range(0, NT - 1);
          in_flit[s]  = mk(s, d, n);
          in_valid[s] = 1'b1;
        end
        @(posedge clk);
        if (in_ready[s]) begin
          exp_q[s][int'(coord_tid(in_flit[s].dst))].push_back(in_flit[s]);
          n++;
          sent++;
          #1 in_valid[s] = 1'b0;
        end
      end
      done_src++;
    end
  end

  initial begin
    int lat [NT][NT];
    in_valid = '0;
    for (int s = 0; s < NT; s++) in_flit[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- phase 1: latency of a lone flit ----
    for (int s = 0; s < NT; s++) for (int d = 0; d < NT; d++) begin
      longint unsigned t0;
      @(negedge clk);
      in_flit[s]  = mk(s, d, 0);
      in_valid[s] = 1'b1;
      @(posedge clk);
      t0 = cycle;
      #1 in_valid[s] = 1'b0;
      while (!out_valid[d]) @(posedge clk) #1;
      lat[s][d] = int'(cycle - t0);
      check(out_flit[d].data == in_flit[s].data && out_flit[d].src == tile_coord(s),
            $sformatf("lone flit %0d->%0d delivered intact", s, d));
      @(posedge clk);
    end
    for (int s = 0; s < NT; s++) for (int d = 0; d < NT; d++) begin
      int hops;
      hops = ((tile_coord(s).x > tile_coord(d).x) ? int'(tile_coord(s).x) - int'(tile_coord(d).x)
                                                  : int'(tile_coord(d).x) - int'(tile_coord(s).x)) +
             ((tile_coord(s).y > tile_coord(d).y) ? int'(tile_coord(s).y) - int'(tile_coord(d).y)
                                                  : int'(tile_coord(d).y) - int'(tile_coord(s).y));
      check(lat[s][d] == lat[0][0] + hops,
            $sformatf("latency %0d->%0d is %0d, expected %0d + %0d hops", s, d, lat[s][d], lat[0][0], hops));
    end
    $display("lone-flit latency: %0d cycles + 1 per hop", lat[0][0]);

    // ---- phase 2: all tiles at once ----
    repeat (5) @(posedge clk);
    phase2 = 1;
    wait (done_src == NT);
    repeat (100) @(posedge clk);
    check(sent == NT * NPKT, "all flits injected");
    check(got == sent, $sformatf("all flits delivered (%0d of %0d)", got, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
