// tb_socket_io: self-checking test of the tile's IO-plane register socket.
//
// Drives IO-plane flits into the socket and checks:
//   - a write to the flush register pulses flush_req once, holds back the
//     acknowledge until flush_done, then sends IO_ACK to the writer;
//   - a write to another register is acknowledged at once, no flush;
//   - IO_IRQ sets and clears the interrupt level and is not acknowledged;
//   - the acknowledge waits for io_out_ready (back-pressure).
// Flush latencies and ready delays are random.
module tb_socket_io;
  import esp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam coord_t ME = '{x: 3'd1, y: 3'd0};

  logic  io_in_valid, io_in_ready, io_out_valid, io_out_ready;
  flit_t io_in, io_out;
  logic  flush_req, flush_done, irq;

  socket_io #(.FLUSH_REG(REG_L2_FLUSH)) dut (.clk, .rst_n, .my_xy(ME), .*);

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

  // flush engine model: answers each flush_req after a random delay
  int n_flush_req = 0;
  initial begin
    flush_done = 1'b0;
    forever begin
      @(posedge clk);
      if (flush_req) begin
        n_flush_req++;
        repeat ($urandom_range(1, 30)) @(posedge clk);
        @(negedge clk) flush_done = 1'b1;
        @(negedge clk) flush_done = 1'b0;
      end
    end
  end

  task automatic send(msg_e m, logic [7:0] reg_idx, coord_t from, logic [127:0] d);
    @(negedge clk);
    io_in       = '0;
    io_in.msg   = m;
    io_in.aux   = reg_idx;
    io_in.src   = from;
    io_in.dst   = ME;
    io_in.addr  = $urandom;
    io_in.data  = d;
    io_in_valid = 1'b1;
    do @(posedge clk); while (!io_in_ready);
    @(negedge clk) io_in_valid = 1'b0;
  endtask

  task automatic get_ack(coord_t from, int unsigned max_wait, output int waited);
    int ready_delay;
    ready_delay = $urandom_range(0, 5);
    waited = 0;
    io_out_ready = 1'b0;
    while (!io_out_valid && waited < int'(max_wait)) begin @(posedge clk); #1; waited++; end
    repeat (ready_delay) begin
      @(posedge clk); #1;
      check(io_out_valid, "acknowledge held under back-pressure");
    end
    @(negedge clk) io_out_ready = 1'b1;
    @(posedge clk);
    check(io_out.msg == IO_ACK && io_out.dst == from && io_out.src == ME,
          "acknowledge addressed to the writer");
    @(negedge clk) io_out_ready = 1'b0;
  endtask

  initial begin
    int w, nf;
    io_in_valid = 1'b0;
    io_in = '0;
    io_out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    nf = 0;
    for (int k = 0; k < 30; k++) begin
      coord_t from;
      from = '{x: 3'($urandom_range(0, 2)), y: 3'($urandom_range(0, 2))};
      case ($urandom_range(0, 2))
        0: begin
          send(IO_WR, REG_L2_FLUSH, from, '0);
          nf++;
          @(posedge clk); #1;
          check(!io_out_valid, "flush write not acknowledged before flush_done");
          get_ack(from, 100, w);
          check(n_flush_req == nf, "exactly one flush request per flush write");
        end
        1: begin
          send(IO_WR, 8'd7, from, '0);
          get_ack(from, 3, w);
          check(w <= 2, "other register acknowledged at once");
          check(n_flush_req == nf, "no flush for another register");
        end
        default: begin
          logic lvl;
          lvl = 1'($urandom);
          send(IO_IRQ, 8'd0, from, {127'd0, lvl});
          @(posedge clk); #1;
          check(irq == lvl, "interrupt level follows IO_IRQ");
          check(!io_out_valid, "IO_IRQ not acknowledged");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
