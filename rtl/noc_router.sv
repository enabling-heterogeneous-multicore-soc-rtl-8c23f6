// noc_router: one router of a 2D-mesh NoC plane, with lookahead routing.
//
// Five ports (N, E, S, W, local). Each input has a FIFO of IN_DEPTH
// single-flit packets. The flit at the head of an input FIFO already names
// its output port in flit.la (lookahead routing, as in the paper): this
// router only arbitrates, and while the flit crosses it computes the
// dimension-ordered (X then Y) route for the next router and writes it into
// flit.la. Each output has a round-robin arbiter over the inputs.
//
// Timing: a flit granted in cycle t is written into the next router's input
// FIFO at the clock edge ending cycle t, so each hop between adjacent tiles
// costs one cycle (paper: "every hop between adjacent tiles takes a single
// cycle"). Output valid/ready: out_valid[p] is a request, out_ready[p] is the
// downstream FIFO's not-full, combinational.
// The single-flit packet, FIFO depth and round-robin policy are this design's
// choices; the paper gives only the topology, lookahead routing and hop time.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff), so lint reports it as used both ways
// (SYNCASYNCNET); the assertions are simulation checks only.
module noc_router
  import esp_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  coord_t       my_xy,
  input  logic [4:0]   in_valid,
  input  flit_t        in_flit  [5],
  output logic [4:0]   in_ready,
  output logic [4:0]   out_valid,
  output flit_t        out_flit [5],
  input  logic [4:0]   out_ready
);

  localparam int unsigned PW = (IN_DEPTH > 1) ? $clog2(IN_DEPTH) : 1;

  flit_t          fifo [5][IN_DEPTH];
  logic [PW-1:0]  rd_ptr [5];
  logic [PW-1:0]  wr_ptr [5];
  logic [PW:0]    count  [5];
  logic [4:0]     head_v;
  flit_t          head   [5];

  // grant[o][i]: input i wins output o this cycle
  logic [4:0]     grant  [5];
  logic [4:0]     pop;
  logic [2:0]     rr     [5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    assign head_v[i]   = (count[i] != '0);
    assign head[i]     = fifo[i][rd_ptr[i]];
    assign in_ready[i] = (count[i] != (PW+1)'(IN_DEPTH));
  end

  // Coordinates of the neighbour behind each output port.
  function automatic coord_t next_xy(coord_t c, int unsigned p);
    coord_t n = c;
    case (p)
      0: n.y = c.y - 1'b1;
      1: n.x = c.x + 1'b1;
      2: n.y = c.y + 1'b1;
      3: n.x = c.x - 1'b1;
      default: n = c;
    endcase
    return n;
  endfunction

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      grant[o]     = '0;
      out_valid[o] = 1'b0;
      out_flit[o]  = head[0];
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!out_valid[o] && head_v[i] && int'(head[i].la) == o) begin
          out_valid[o] = 1'b1;
          grant[o][i]  = 1'b1;
          out_flit[o]  = head[i];
        end
      end
      // lookahead: route for the router behind this output
      out_flit[o].la = (o == int'(P_L)) ? P_L : xy_route(next_xy(my_xy, o), out_flit[o].dst);
    end
  end

  // Pops depend on out_ready; kept apart from the grant logic above so that
  // out_valid visibly does not depend on out_ready.
  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        if (grant[o][i] && out_ready[o]) pop[i] = 1'b1;
  end

  logic [4:0] push;
  for (genvar i = 0; i < 5; i++) begin : g_push
    assign push[i] = in_valid[i] && in_ready[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rd_ptr[i] <= '0;
        wr_ptr[i] <= '0;
        count[i]  <= '0;
        rr[i]     <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (push[i]) begin
          fifo[i][wr_ptr[i]] <= in_flit[i];
          wr_ptr[i] <= (wr_ptr[i] == PW'(IN_DEPTH-1)) ? '0 : wr_ptr[i] + 1'b1;
        end
        if (pop[i])
          rd_ptr[i] <= (rd_ptr[i] == PW'(IN_DEPTH-1)) ? '0 : rd_ptr[i] + 1'b1;
        count[i] <= count[i] + (PW+1)'(push[i]) - (PW+1)'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o])
          for (int i = 0; i < 5; i++)
            if (grant[o][i]) rr[o] <= (i == 4) ? 3'd0 : 3'(i + 1);
    end
  end

  // A flit must never be routed back out of the port it came in on.
  for (genvar i = 0; i < 4; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
      head_v[i] |-> int'(head[i].la) != i);
  end

endmodule
