// llc: one slice of the last-level cache with its directory, in a memory
// tile. It is the home of every line whose address falls in this tile's
// partition and the last on-chip storage before DRAM.
//
// Each line has a directory state: I (not present), V (valid data, no
// sharer, no owner), S (shared by the tiles in the sharer vector) or EM
// (one owner holds it in E or M). V is the extra state of the ESP protocol:
// a line in V is served without going to DRAM. A dirty bit says the LLC
// copy differs from DRAM.
//
// The controller is blocking: it takes one request at a time and finishes
// it, forwards and invalidations included, before the next. Requests come
// from plane 1 (GETS, GETM, PUTS, PUTM), from plane 4 (DMA_RD with a burst
// length in lines, DMA_WR with one line) and from the flush register.
//   GETS : V -> EM (grant E); S -> add sharer (data S);
//          EM -> FWD_GETS to the owner, take its data, S {owner, requester}.
//   GETM : V -> EM (grant M); S -> FWD_INV to every other sharer, collect
//          the INVACKs, then grant M; EM -> FWD_GETM to the owner, take its
//          data, grant M.
//   PUTS/PUTM : remove the requester; a PUTM from the owner brings the
//          dirty data; a line left with nobody goes to V. Always PUTACK.
//   DMA_RD/DMA_WR : the line is recalled from its owner or sharers, read
//          or written, and left in V; a burst is handled line by line.
//   miss : a victim is recalled and, if dirty, written back to DRAM; then
//          the line is read from DRAM and installed in V.
//   flush: every line is recalled, written back if dirty and invalidated;
//          flush_done pulses at the end.
// DRAM interface: mem_req_* (one line, we = write) with valid/ready, and
// mem_rsp_valid/mem_rsp_data for reads, in order.
// The states (MESI + V), DMA handling and leaving DMA lines in V, and the
// flush register follow the paper; direct mapping, the blocking
// controller, the message set and all encodings are this design's choices.
// The directory's per-line valid bits are one packed vector of SETS bits,
// cleared together at reset (a sized zero, not a replication), so reset
// takes a single cycle instead of a SETS-cycle sweep.
// rst_n is the asynchronous reset of the flops and is also sampled by the
// clocked assertions (disable iff), so lint reports it as used both ways
// (SYNCASYNCNET); the assertions are simulation checks only.
module llc
  import esp_pkg::*;
#(
  parameter int unsigned SETS = 32768     // 512 KiB of 16-byte lines
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_xy,
  // plane 1 in, plane 2 out, plane 3 in/out
  input  logic              req_in_valid,
  output logic              req_in_ready,
  input  flit_t             req_in,
  output logic              fwd_out_valid,
  input  logic              fwd_out_ready,
  output flit_t             fwd_out,
  input  logic              rsp_in_valid,
  output logic              rsp_in_ready,
  input  flit_t             rsp_in,
  output logic              rsp_out_valid,
  input  logic              rsp_out_ready,
  output flit_t             rsp_out,
  // plane 4 in, plane 5 out
  input  logic              dma_in_valid,
  output logic              dma_in_ready,
  input  flit_t             dma_in,
  output logic              dma_out_valid,
  input  logic              dma_out_ready,
  output flit_t             dma_out,
  // flush
  input  logic              flush_req,
  output logic              flush_done,
  // DRAM channel
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [LINE_W-1:0] mem_req_data,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data
);

  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - IDX_W - OFF_W;

  typedef enum logic [1:0] {D_I = 2'd0, D_V = 2'd1, D_S = 2'd2, D_EM = 2'd3} dstate_e;
  typedef enum logic [3:0] {
    L_IDLE, L_LOOK, L_SERVE, L_INV, L_INVW, L_FWD, L_FWDW, L_WB, L_FILL, L_FILLW,
    L_RSP, L_FLUSH, L_FDONE
  } lstate_e;

  // ---------------- directory and data ----------------
  logic [SETS-1:0]    dval;         // line present (state not I)
  dstate_e            dst   [SETS]; // meaningful only where dval is set
  logic [TAG_W-1:0]   dtag  [SETS];
  logic               ddirty[SETS];
  logic [N_TILES-1:0] dshr  [SETS];
  logic [TID_W-1:0]   down  [SETS];
  logic [LINE_W-1:0]  ddata [SETS];

  // ---------------- current request ----------------
  lstate_e            ls;
  msg_e               c_msg;
  coord_t             c_src;
  logic [ADDR_W-1:0]  c_addr;
  logic [LINE_W-1:0]  c_data;
  logic [7:0]         c_len;
  logic               c_dma;
  logic               evicting;     // recalling a victim (miss or flush)
  logic [IDX_W:0]     fl_idx;
  logic               flush_pend;
  logic               flushing;     // walking all sets for a flush
  logic [N_TILES-1:0] inv_mask;
  logic [4:0]         inv_pend;
  flit_t              out_q;
  logic               out_is_dma;
  logic               mem_rd_sent;

  logic [31:0] n_fwd_gets, n_fwd_getm, n_inv, n_dram_rd, n_dram_wr, n_v_hits, n_dma_lines;

  function automatic dstate_e dstate(logic [IDX_W-1:0] i);
    return dval[i] ? dst[i] : D_I;
  endfunction

  function automatic logic [TID_W-1:0] tid(coord_t c);
    return coord_tid(c);
  endfunction

  logic [IDX_W-1:0] ci;
  logic             chit;
  logic [TID_W-1:0] src_id;
  logic [ADDR_W-1:0] line_addr;  // address of the line now in set ci
  assign ci        = evicting ? fl_idx[IDX_W-1:0] : c_addr[OFF_W +: IDX_W];
  assign chit      = (dstate(ci) != D_I) && (dtag[ci] == c_addr[ADDR_W-1 -: TAG_W]);
  assign src_id    = tid(c_src);
  assign line_addr = {dtag[ci], ci, {OFF_W{1'b0}}};

  assign req_in_ready = (ls == L_IDLE) && !flush_pend;
  assign dma_in_ready = (ls == L_IDLE) && !flush_pend && !req_in_valid;
  assign rsp_in_ready = 1'b1;

  assign rsp_out_valid = (ls == L_RSP) && !out_is_dma;
  assign dma_out_valid = (ls == L_RSP) &&  out_is_dma;
  assign rsp_out       = out_q;
  assign dma_out       = out_q;

  // forwards and invalidations
  logic [TID_W-1:0] inv_tgt;
  always_comb begin
    inv_tgt = '0;
    for (int i = N_TILES - 1; i >= 0; i--) if (inv_mask[i]) inv_tgt = TID_W'(i);
  end
  assign fwd_out_valid = (ls == L_FWD) || (ls == L_INV && inv_mask != '0);
  always_comb begin
    fwd_out.la   = P_L;
    fwd_out.src  = my_xy;
    fwd_out.addr = line_addr;
    fwd_out.aux  = '0;
    fwd_out.data = '0;
    if (ls == L_FWD) begin
      fwd_out.dst = tile_coord(int'(down[ci]));
      fwd_out.msg = (c_msg == REQ_GETS && !evicting && !c_dma) ? FWD_GETS : FWD_GETM;
    end else begin
      fwd_out.dst = tile_coord(int'(inv_tgt));
      fwd_out.msg = FWD_INV;
    end
  end

  // DRAM
  assign mem_req_valid = (ls == L_WB && ddirty[ci]) || (ls == L_FILL && !mem_rd_sent);
  assign mem_req_we    = (ls == L_WB);
  assign mem_req_addr  = (ls == L_WB) ? line_addr : {c_addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
  assign mem_req_data  = ddata[ci];

  function automatic flit_t mk(coord_t dst_xy, msg_e m, logic [ADDR_W-1:0] a, logic [LINE_W-1:0] d);
    flit_t f;
    f.la = P_L; f.dst = dst_xy; f.src = my_xy; f.msg = m; f.addr = a; f.aux = '0; f.data = d;
    return f;
  endfunction

  logic [N_TILES-1:0] src_bit;
  assign src_bit = N_TILES'(1) << src_id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dval        <= SETS'(0);
      ls          <= L_IDLE;
      c_msg       <= REQ_GETS;
      c_src       <= '0;
      c_addr      <= '0;
      c_data      <= '0;
      c_len       <= '0;
      c_dma       <= 1'b0;
      evicting    <= 1'b0;
      fl_idx      <= '0;
      flush_pend  <= 1'b0;
      flushing    <= 1'b0;
      flush_done  <= 1'b0;
      inv_mask    <= '0;
      inv_pend    <= '0;
      out_q       <= '0;
      out_is_dma  <= 1'b0;
      mem_rd_sent <= 1'b0;
      n_fwd_gets <= '0; n_fwd_getm <= '0; n_inv <= '0; n_dram_rd <= '0;
      n_dram_wr <= '0; n_v_hits <= '0; n_dma_lines <= '0;
    end else begin
      flush_done <= 1'b0;
      if (flush_req) flush_pend <= 1'b1;

      // invalidation acks arrive in any state
      inv_pend <= inv_pend + 5'(fwd_out_valid && fwd_out_ready && ls == L_INV)
                           - 5'(rsp_in_valid && rsp_in.msg == RSP_INVACK);

      case (ls)
        L_IDLE: begin
          evicting <= 1'b0;
          if (flush_pend) begin
            fl_idx   <= '0;
            flushing <= 1'b1;
            ls       <= L_FLUSH;
          end else if (req_in_valid) begin
            c_msg  <= req_in.msg;
            c_src  <= req_in.src;
            c_addr <= req_in.addr;
            c_data <= req_in.data;
            c_dma  <= 1'b0;
            ls     <= L_LOOK;
          end else if (dma_in_valid) begin
            c_msg  <= dma_in.msg;
            c_src  <= dma_in.src;
            c_addr <= dma_in.addr;
            c_data <= dma_in.data;
            c_len  <= (dma_in.aux == 8'd0) ? 8'd1 : dma_in.aux;
            c_dma  <= 1'b1;
            ls     <= L_LOOK;
          end
        end

        L_LOOK: begin
          if (c_msg == REQ_PUTS || c_msg == REQ_PUTM) begin
            if (chit) begin
              if (dstate(ci) == D_EM && down[ci] == src_id) begin
                if (c_msg == REQ_PUTM) begin
                  ddata[ci]  <= c_data;
                  ddirty[ci] <= 1'b1;
                end
                dst[ci] <= D_V;
              end else if (dstate(ci) == D_S) begin
                dshr[ci] <= dshr[ci] & ~src_bit;
                if ((dshr[ci] & ~src_bit) == '0) dst[ci] <= D_V;
              end
            end
            out_q      <= mk(c_src, RSP_PUTACK, c_addr, '0);
            out_is_dma <= 1'b0;
            ls         <= L_RSP;
          end else if (chit) begin
            if (dstate(ci) == D_V) n_v_hits <= n_v_hits + 1;
            ls <= L_SERVE;
          end else if (dstate(ci) != D_I) begin
            // recall the victim of this set, then write it back
            fl_idx   <= {1'b0, ci};
            evicting <= 1'b1;
            ls       <= L_SERVE;
          end else begin
            mem_rd_sent <= 1'b0;
            ls          <= L_FILL;
          end
        end

        // Decide the next step for line ci; re-entered after every
        // forward or invalidation round until the request can be answered.
        L_SERVE: begin
          if (evicting || c_dma) begin
            // recall to V
            if (dstate(ci) == D_EM) begin
              ls <= L_FWD;
            end else if (dstate(ci) == D_S) begin
              inv_mask <= dshr[ci];
              ls       <= L_INV;
            end else if (evicting) begin
              ls <= L_WB;
            end else begin
              // DMA on a line in V
              n_dma_lines <= n_dma_lines + 1;
              out_is_dma  <= 1'b1;
              if (c_msg == DMA_WR) begin
                ddata[ci]  <= c_data;
                ddirty[ci] <= 1'b1;
                out_q      <= mk(c_src, DMA_WRACK, c_addr, '0);
              end else begin
                out_q      <= mk(c_src, DMA_DATA, c_addr, ddata[ci]);
              end
              ls <= L_RSP;
            end
          end else begin
            out_is_dma <= 1'b0;
            case (dstate(ci))
              D_V: begin
                dst[ci]  <= D_EM;
                down[ci] <= src_id;
                dshr[ci] <= '0;
                out_q    <= mk(c_src, (c_msg == REQ_GETM) ? RSP_DATA_M : RSP_DATA_E, c_addr, ddata[ci]);
                ls       <= L_RSP;
              end
              D_S: begin
                if (c_msg == REQ_GETS) begin
                  dshr[ci] <= dshr[ci] | src_bit;
                  out_q    <= mk(c_src, RSP_DATA_S, c_addr, ddata[ci]);
                  ls       <= L_RSP;
                end else if ((dshr[ci] & ~src_bit) == '0) begin
                  dst[ci]  <= D_EM;
                  down[ci] <= src_id;
                  dshr[ci] <= '0;
                  out_q    <= mk(c_src, RSP_DATA_M, c_addr, ddata[ci]);
                  ls       <= L_RSP;
                end else begin
                  inv_mask <= dshr[ci] & ~src_bit;
                  ls       <= L_INV;
                end
              end
              default: begin   // D_EM
                if (down[ci] == src_id) begin
                  out_q <= mk(c_src, (c_msg == REQ_GETM) ? RSP_DATA_M : RSP_DATA_E, c_addr, ddata[ci]);
                  ls    <= L_RSP;
                end else begin
                  ls <= L_FWD;
                end
              end
            endcase
          end
        end

        L_INV: begin
          if (inv_mask == '0) ls <= L_INVW;
          else if (fwd_out_ready) begin
            inv_mask[inv_tgt] <= 1'b0;
            n_inv <= n_inv + 1;
          end
        end
        L_INVW: begin
          if (inv_pend == 5'd0 || (inv_pend == 5'd1 && rsp_in_valid && rsp_in.msg == RSP_INVACK)) begin
            // only the requester (if any) remains a sharer
            if (!evicting && !c_dma && (dshr[ci] & src_bit) != '0) dshr[ci] <= src_bit;
            else begin
              dshr[ci] <= '0;
              dst[ci]  <= D_V;
            end
            ls <= L_SERVE;
          end
        end

        L_FWD: if (fwd_out_ready) begin
          if (fwd_out.msg == FWD_GETS) n_fwd_gets <= n_fwd_gets + 1;
          else                         n_fwd_getm <= n_fwd_getm + 1;
          ls <= L_FWDW;
        end
        L_FWDW: if (rsp_in_valid && rsp_in.msg == RSP_FWD_DATA) begin
          if (rsp_in.aux[0]) begin
            ddata[ci]  <= rsp_in.data;
            ddirty[ci] <= 1'b1;
          end
          if (!evicting && !c_dma && c_msg == REQ_GETS) begin
            dst[ci]  <= D_S;
            dshr[ci] <= N_TILES'(1) << down[ci];
          end else begin
            dst[ci]  <= D_V;
            dshr[ci] <= '0;
          end
          ls <= L_SERVE;
        end

        L_WB: begin
          // victim in V: write back if dirty, then drop it
          if (!ddirty[ci]) begin
            dval[ci] <= 1'b0;
            ls      <= flushing ? L_FLUSH : L_LOOK;
            if (flushing) fl_idx <= fl_idx + 1'b1;
            evicting <= flushing;
          end else if (mem_req_ready) begin
            n_dram_wr  <= n_dram_wr + 1;
            ddirty[ci] <= 1'b0;
            dval[ci]   <= 1'b0;
            ls         <= flushing ? L_FLUSH : L_LOOK;
            if (flushing) fl_idx <= fl_idx + 1'b1;
            evicting <= flushing;
          end
        end

        L_FILL: if (mem_req_ready) begin
          mem_rd_sent <= 1'b1;
          n_dram_rd   <= n_dram_rd + 1;
          ls          <= L_FILLW;
        end
        L_FILLW: if (mem_rsp_valid) begin
          dval[ci]   <= 1'b1;
          dst[ci]    <= D_V;
          dtag[ci]   <= c_addr[ADDR_W-1 -: TAG_W];
          ddata[ci]  <= mem_rsp_data;
          ddirty[ci] <= 1'b0;
          dshr[ci]   <= '0;
          ls         <= L_SERVE;
        end

        L_RSP: begin
          if ((out_is_dma && dma_out_ready) || (!out_is_dma && rsp_out_ready)) begin
            if (c_dma && c_msg == DMA_RD && c_len > 8'd1) begin
              c_len  <= c_len - 1'b1;
              c_addr <= c_addr + ADDR_W'(LINE_B);
              ls     <= L_LOOK;
            end else begin
              ls <= L_IDLE;
            end
          end
        end

        L_FLUSH: begin
          if (fl_idx == (IDX_W+1)'(SETS)) ls <= L_FDONE;
          else if (dstate(fl_idx[IDX_W-1:0]) != D_I) begin
            evicting <= 1'b1;
            ls       <= L_SERVE;
          end else fl_idx <= fl_idx + 1'b1;
        end
        L_FDONE: begin
          flush_pend <= 1'b0;
          flushing   <= 1'b0;
          flush_done <= 1'b1;
          evicting   <= 1'b0;
          ls         <= L_IDLE;
        end
        default: ls <= L_IDLE;
      endcase
    end
  end

  a_no_unexpected_ack: assert property (@(posedge clk) disable iff (!rst_n)
    !(inv_pend == 5'd0 && rsp_in_valid && rsp_in.msg == RSP_INVACK && !(ls == L_INV)));

endmodule
