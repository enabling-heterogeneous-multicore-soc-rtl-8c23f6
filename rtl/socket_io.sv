// socket_io: the register and interrupt endpoint of a tile's socket on the
// IO/IRQ NoC plane (plane 6).
//
// IO_WR to the flush register (REG_L2_FLUSH in a processor tile,
// REG_LLC_FLUSH in a memory tile; flit.aux holds the register index) pulses
// flush_req for one cycle; when the cache reports flush_done, an IO_ACK goes
// back to the writer. A write to any other register is acknowledged at
// once and ignored. IO_IRQ sets the tile's interrupt level to flit.data[0]
// and is not acknowledged. Only one flush can be outstanding; a second
// IO_WR waits on the plane until the first is acknowledged.
// The use of a memory-mapped register on this plane to start a flush and
// to carry interrupts follows the paper; register indices, the
// acknowledge message and the one-outstanding rule are this design's
// choices.
module socket_io
  import esp_pkg::*;
#(
  parameter logic [7:0] FLUSH_REG = REG_L2_FLUSH
) (
  input  logic   clk,
  input  logic   rst_n,
  input  coord_t my_xy,
  input  logic   io_in_valid,
  output logic   io_in_ready,
  input  flit_t  io_in,
  output logic   io_out_valid,
  input  logic   io_out_ready,
  output flit_t  io_out,
  output logic   flush_req,
  input  logic   flush_done,
  output logic   irq
);

  typedef enum logic [1:0] {IO_IDLE, IO_WAIT, IO_ACKS} io_state_e;
  io_state_e st;
  coord_t    who;
  logic [ADDR_W-1:0] waddr;

  assign io_in_ready  = (st == IO_IDLE);
  assign io_out_valid = (st == IO_ACKS);
  always_comb begin
    io_out      = '0;
    io_out.la   = P_L;
    io_out.dst  = who;
    io_out.src  = my_xy;
    io_out.msg  = IO_ACK;
    io_out.addr = waddr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IO_IDLE;
      who       <= '0;
      waddr     <= '0;
      flush_req <= 1'b0;
      irq       <= 1'b0;
    end else begin
      flush_req <= 1'b0;
      case (st)
        IO_IDLE: if (io_in_valid) begin
          if (io_in.msg == IO_IRQ) begin
            irq <= io_in.data[0];
          end else if (io_in.msg == IO_WR) begin
            who   <= io_in.src;
            waddr <= io_in.addr;
            if (io_in.aux == FLUSH_REG) begin
              flush_req <= 1'b1;
              st        <= IO_WAIT;
            end else begin
              st <= IO_ACKS;
            end
          end
        end
        IO_WAIT: if (flush_done) st <= IO_ACKS;
        IO_ACKS: if (io_out_ready) st <= IO_IDLE;
        default: st <= IO_IDLE;
      endcase
    end
  end

endmodule
