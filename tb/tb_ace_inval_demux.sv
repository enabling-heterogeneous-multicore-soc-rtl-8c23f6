// tb_ace_inval_demux: self-checking test of the AC-channel demultiplexer.
//
// Random AC requests with random prot bits and random ready levels on the
// two destinations. Checks, every cycle, that a request with prot[2] = 1
// (instruction) goes only to the instruction cache, prot[2] = 0 only to the
// data-cache invalidation unit, that the address and snoop type pass
// unchanged, and that ac_ready is the ready of the selected destination.
module tb_ace_inval_demux;
  import esp_pkg::*;

  int checks = 0, failures = 0;

  logic    ac_valid, ac_ready, ic_valid, ic_ready, dc_valid, dc_ready;
  ace_ac_t ac, ic_ac, dc_ac;

  ace_inval_demux dut (.*);

  initial begin
    #100000;
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

  initial begin
    int n_i, n_d;
    n_i = 0; n_d = 0;
    for (int k = 0; k < 500; k++) begin
      ac_valid = 1'($urandom);
      ac.addr  = $urandom;
      ac.snoop = ($urandom_range(0, 3) == 0) ? 4'($urandom) : ACSNOOP_MAKEINVALID;
      ac.prot  = 3'($urandom);
      ic_ready = 1'($urandom);
      dc_ready = 1'($urandom);
      #1;
      if (ac.prot[2]) begin
        check(ic_valid == ac_valid && !dc_valid, "instruction request to the I-cache only");
        check(ac_ready == ic_ready, "ready from the I-cache");
        check(ic_ac == ac, "I-side request unchanged");
        if (ac_valid) n_i++;
      end else begin
        check(dc_valid == ac_valid && !ic_valid, "data request to the D-cache only");
        check(ac_ready == dc_ready, "ready from the D-cache unit");
        check(dc_ac == ac, "D-side request unchanged");
        if (ac_valid) n_d++;
      end
      #1;
    end
    check(n_i > 50 && n_d > 50, "both destinations exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
