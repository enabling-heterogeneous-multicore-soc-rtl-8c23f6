// noc_mesh: one physical NoC plane, an NX x NY 2D mesh of noc_router.
//
// Tile t (t = y*NX + x) owns router (x, y). Its local port is exposed as
// loc_in_* (tile to NoC) and loc_out_* (NoC to tile), each a valid/ready
// pair carrying one flit. On injection the plane computes the lookahead
// field for the source router from the flit's destination, so a tile only
// fills in dst, src and the payload. A packet takes one cycle to enter the
// source router plus one cycle per hop; it is delivered from the
// destination router's local output. Mesh edges are tied off: with X-then-Y
// routing no flit is ever sent off the edge.
// The mesh and the one-router-per-tile arrangement follow the paper; the
// SoC instantiates six of these planes.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff) of the blocks inside, so lint reports
// it as used both ways (SYNCASYNCNET); the assertions are simulation
// checks only.
module noc_mesh
  import esp_pkg::*;
#(
  parameter int unsigned NX = NOC_X,
  parameter int unsigned NY = NOC_Y
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NX*NY-1:0]  loc_in_valid,
  input  flit_t             loc_in_flit  [NX*NY],
  output logic [NX*NY-1:0]  loc_in_ready,
  output logic [NX*NY-1:0]  loc_out_valid,
  output flit_t             loc_out_flit [NX*NY],
  input  logic [NX*NY-1:0]  loc_out_ready
);

  localparam int unsigned NT = NX * NY;

  logic [4:0] r_in_valid  [NT];
  flit_t      r_in_flit   [NT][5];
  logic [4:0] r_in_ready  [NT];
  logic [4:0] r_out_valid [NT];
  flit_t      r_out_flit  [NT][5];
  logic [4:0] r_out_ready [NT];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int unsigned T = y * NX + x;
      coord_t xy;
      assign xy.x = COORD_W'(x);
      assign xy.y = COORD_W'(y);

      // local port
      always_comb begin
        r_in_flit[T][P_L]    = loc_in_flit[T];
        r_in_flit[T][P_L].la = xy_route(xy, loc_in_flit[T].dst);
      end
      assign r_in_valid[T][P_L]  = loc_in_valid[T];
      assign loc_in_ready[T]     = r_in_ready[T][P_L];
      assign loc_out_valid[T]    = r_out_valid[T][P_L];
      assign loc_out_flit[T]     = r_out_flit[T][P_L];
      assign r_out_ready[T][P_L] = loc_out_ready[T];

      // north link
      if (y > 0) begin : g_n
        assign r_in_valid[T][P_N]  = r_out_valid[T-NX][P_S];
        assign r_in_flit[T][P_N]   = r_out_flit[T-NX][P_S];
        assign r_out_ready[T][P_N] = r_in_ready[T-NX][P_S];
      end else begin : g_nt
        assign r_in_valid[T][P_N]  = 1'b0;
        assign r_in_flit[T][P_N]   = '0;
        assign r_out_ready[T][P_N] = 1'b1;
      end
      // south link
      if (y < NY - 1) begin : g_s
        assign r_in_valid[T][P_S]  = r_out_valid[T+NX][P_N];
        assign r_in_flit[T][P_S]   = r_out_flit[T+NX][P_N];
        assign r_out_ready[T][P_S] = r_in_ready[T+NX][P_N];
      end else begin : g_st
        assign r_in_valid[T][P_S]  = 1'b0;
        assign r_in_flit[T][P_S]   = '0;
        assign r_out_ready[T][P_S] = 1'b1;
      end
      // west link
      if (x > 0) begin : g_w
        assign r_in_valid[T][P_W]  = r_out_valid[T-1][P_E];
        assign r_in_flit[T][P_W]   = r_out_flit[T-1][P_E];
        assign r_out_ready[T][P_W] = r_in_ready[T-1][P_E];
      end else begin : g_wt
        assign r_in_valid[T][P_W]  = 1'b0;
        assign r_in_flit[T][P_W]   = '0;
        assign r_out_ready[T][P_W] = 1'b1;
      end
      // east link
      if (x < NX - 1) begin : g_e
        assign r_in_valid[T][P_E]  = r_out_valid[T+1][P_W];
        assign r_in_flit[T][P_E]   = r_out_flit[T+1][P_W];
        assign r_out_ready[T][P_E] = r_in_ready[T+1][P_W];
      end else begin : g_et
        assign r_in_valid[T][P_E]  = 1'b0;
        assign r_in_flit[T][P_E]   = '0;
        assign r_out_ready[T][P_E] = 1'b1;
      end

      noc_router u_router (
        .clk       (clk),
        .rst_n     (rst_n),
        .my_xy     (xy),
        .in_valid  (r_in_valid[T]),
        .in_flit   (r_in_flit[T]),
        .in_ready  (r_in_ready[T]),
        .out_valid (r_out_valid[T]),
        .out_flit  (r_out_flit[T]),
        .out_ready (r_out_ready[T])
      );
    end
  end

endmodule
