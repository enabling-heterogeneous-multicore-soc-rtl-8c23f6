// dram_model: behavioural model of a DRAM channel behind a memory tile
// (not synthesizable). Line-wide reads and writes; a read answers after
// LAT cycles, in order. A line never written reads as a pattern made from
// its address: each 32-bit word is {addr[31:4], word index}. n_rd and n_wr
// count requests.
module dram_model
  import esp_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [LINE_W-1:0] req_data,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_data
);
  logic [LINE_W-1:0] mem [logic [ADDR_W-1:0]];
  int unsigned n_rd = 0, n_wr = 0;
  int unsigned busy = 0;
  logic [ADDR_W-1:0] pend_addr;
  logic pend = 1'b0;

  function automatic logic [LINE_W-1:0] init_line(logic [ADDR_W-1:0] a);
    logic [LINE_W-1:0] l;
    for (int i = 0; i < 4; i++) l[i*32 +: 32] = {a[31:4], 4'(i)};
    return l;
  endfunction

  function automatic logic [LINE_W-1:0] peek(logic [ADDR_W-1:0] a);
    logic [ADDR_W-1:0] la = {a[ADDR_W-1:4], 4'h0};
    return mem.exists(la) ? mem[la] : init_line(la);
  endfunction

  assign req_ready = !pend;
  initial begin rsp_valid = 1'b0; rsp_data = '0; end

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr] = req_data;
        n_wr++;
      end else begin
        pend      <= 1'b1;
        pend_addr <= req_addr;
        busy      <= LAT;
        n_rd++;
      end
    end
    if (pend) begin
      if (busy <= 1) begin
        pend      <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_data  <= peek(pend_addr);
      end else busy <= busy - 1;
    end
  end
endmodule
