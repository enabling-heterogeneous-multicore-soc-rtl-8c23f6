// tb_noc_router: self-checking test of one mesh router placed at (1,1).
//
// Random single-flit packets enter on the local, west and north inputs
// (only directions a dimension-ordered route can arrive from), with random
// back-pressure on every output. Each flit carries its input number and a
// sequence number in its payload. The checker verifies for every flit that
//   - it leaves on the output the X-then-Y route gives for this router,
//   - its lookahead field holds the route for the next router,
//   - the rest of the flit is unchanged, nothing is lost or duplicated,
//   - flits from one input to one output keep their order.
module tb_noc_router;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam coord_t ME = '{x: 3'd1, y: 3'd1};

  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t      in_flit  [5];
  flit_t      out_flit [5];

  noc_router dut (
    .clk, .rst_n, .my_xy(ME),
    .in_valid, .in_flit, .in_ready,
    .out_valid, .out_flit, .out_ready
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

  function automatic coord_t nxt(coord_t c, int p);
    coord_t n = c;
    case (p)
      0: n.y = c.y - 1;
      1: n.x = c.x + 1;
      2: n.y = c.y + 1;
      3: n.x = c.x - 1;
      default: n = c;
    endcase
    return n;
  endfunction

  // random destination legal for a flit arriving on input port i
  function automatic coord_t rand_dst(int i);
    coord_t d;
    d.x = 3'($urandom_range(0, 2));
    d.y = 3'($urandom_range(0, 2));
    if (i == int'(P_W)) begin            // travelling east: x >= 1
      d.x = 3'($urandom_range(1, 2));
    end else if (i == int'(P_N)) begin   // travelling south in column 1: y >= 1
      d.x = 3'd1;
      d.y = 3'($urandom_range(1, 2));
    end
    return d;
  endfunction

  // expected flits per (input, output) pair, in order
  flit_t exp_q [5][5][$];
  int    sent = 0, got = 0;
  int    won [5];
  int    sending [5] = '{1, 1, 1, 1, 1};
  localparam int NPKT = 400;

  for (genvar i = 0; i < 5; i++) begin : g_src
    if (i == int'(P_L) || i == int'(P_W) || i == int'(P_N)) begin : g_on
      int seq = 0;
      initial begin
        in_valid[i] = 1'b0;
        in_flit[i]  = '0;
        @(posedge rst_n);
        while (seq < NPKT) begin
          @(negedge clk);
          if (!in_valid[i] && ($urandom_range(0, 3) != 0)) begin
            flit_t f;
            f.dst  = rand_dst(i);
            f.src  = '{x: 3'(i), y: 3'd0};
            f.msg  = msg_e'(REQ_GETS);
            f.addr = $urandom;
            f.aux  = 8'(i);
            f.data = {64'($urandom), 32'(seq), 32'(i)};
            f.la   = xy_route(ME, f.dst);
            in_flit[i]  = f;
            in_valid[i] = 1'b1;
          end
          @(posedge clk);
          if (in_valid[i] && in_ready[i]) begin
            flit_t e;
            e = in_flit[i];
            e.la = (e.la == P_L) ? P_L : xy_route(nxt(ME, int'(e.la)), e.dst);
            exp_q[i][int'(in_flit[i].la)].push_back(e);
            seq++;
            sent++;
            #1 in_valid[i] = 1'b0;
          end
        end
        sending[i] = 0;
      end
    end else begin : g_off
      initial begin
        in_valid[i] = 1'b0;
        in_flit[i]  = '0;
      end
    end
  end

  // sink with random back-pressure and checking
  always @(negedge clk) out_ready <= 5'($urandom);
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        int i;
        i = int'(out_flit[o].data[31:0]);
        got++;
        won[i]++;
        if (i > 4 || exp_q[i][o].size() == 0) begin
          failures++; checks++;
          $display("FAIL: unexpected flit on output %0d from input %0d", o, i);
        end else begin
          flit_t e;
          e = exp_q[i][o].pop_front();
          checks++;
          if (out_flit[o] !== e) begin
            failures++;
            $display("FAIL: output %0d got %h expected %h", o, out_flit[o], e);
          end
        end
      end
    end
  end

  initial begin
    out_ready = '0;
    for (int i = 0; i < 5; i++) won[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (sending[0] == 0 && sending[3] == 0 && sending[4] == 0);
    repeat (50) @(posedge clk);
    check(sent == 3 * NPKT, "all flits injected");
    check(got == sent, $sformatf("all flits delivered (%0d of %0d)", got, sent));
    for (int i = 0; i < 5; i++)
      for (int o = 0; o < 5; o++)
        check(exp_q[i][o].size() == 0, $sformatf("nothing left for %0d->%0d", i, o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
