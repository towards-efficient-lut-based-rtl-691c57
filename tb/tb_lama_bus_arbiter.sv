// tb_lama_bus_arbiter: self-checking test of the I/O-bus arbiter and bus gating. Random request
// patterns are checked against fixed priority (GSA, mask, temp buffer, counters, host), the
// selected data, the stall flag, and the gating of host traffic in both directions.
module tb_lama_bus_arbiter;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  int checks = 0, failures = 0;
  logic [4:0] req, gnt; logic gate_out, gate_in, bus_valid, stall, host_valid;
  line_t s [5]; line_t bus;

  lama_bus_arbiter dut (.req, .src_gsa(s[0]), .src_mask(s[1]), .src_tb(s[2]), .src_cnt(s[3]),
                        .src_host(s[4]), .gate_out, .gate_in, .gnt, .bus, .bus_valid, .stall,
                        .host_valid);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      int win; logic [4:0] eff;
      for (int i = 0; i < 5; i++) for (int m = 0; m < 16; m++) s[i][m] = 8'($urandom);
      req = 5'($urandom); gate_out = 1'($urandom); gate_in = 1'($urandom);
      #1;
      eff = req; if (!gate_in) eff[4] = 0;
      win = -1;
      for (int i = 4; i >= 0; i--) if (eff[i]) win = i;
      chk("valid", bus_valid, int'(win >= 0));
      chk("gnt", gnt, win >= 0 ? (1 << win) : 0);
      if (win >= 0) chk("data", int'(bus == s[win]), 1);
      chk("stall", stall, int'($countones(eff) > 1));
      chk("host", host_valid, int'(win >= 0 && win != 4 && gate_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
