// ace_inval_demux: routes ACE AC-channel invalidations from the L2 to the
// L1 instruction cache or the L1 data cache.
//
// The L2 sends with each MakeInvalid the AXI protection bits the line was
// filled with. prot[2] = 1 marks an instruction line: the snoop goes to the
// instruction-cache output; otherwise it goes to the data-cache output.
// Purely combinational; ac_ready follows the selected output's ready.
// Routing by the permission bits follows the paper; using AXI prot[2]
// (instruction/data) as that bit is this design's choice.
module ace_inval_demux
  import esp_pkg::*;
(
  input  logic    ac_valid,
  output logic    ac_ready,
  input  ace_ac_t ac,
  output logic    ic_valid,
  input  logic    ic_ready,
  output ace_ac_t ic_ac,
  output logic    dc_valid,
  input  logic    dc_ready,
  output ace_ac_t dc_ac
);

  logic to_icache;
  assign to_icache = ac.prot[2];
  assign ic_valid  = ac_valid &&  to_icache;
  assign dc_valid  = ac_valid && !to_icache;
  assign ic_ac     = ac;
  assign dc_ac     = ac;
  assign ac_ready  = to_icache ? ic_ready : dc_ready;

endmodule
