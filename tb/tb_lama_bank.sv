// tb_lama_bank: self-checking test of one Lama bank driven by individual bank commands
// (exercises the bank controller, the counters, temporary buffer, mask logic and bus).
//   1. ACT / WR / RD / PRE round trip with ordinary addressing; tRCD and write-recovery stall.
//   2. 8-bit LUT multiplication: IRD of 32 operands, LUT row = a, four LUT retrievals with the
//      mask selecting 2 of 16 mats, one packed host line of 8 products checked against a*b.
//   3. 4-bit multiplication with the mask bypassed: 16 products per retrieval.
//   4. Counting step: occurrence counters in a counter row are incremented / decremented by the
//      sign XNOR, indexed by the weight exponents, checked against the cell contents.
// LUTs and operands are placed straight into the DRAM model, as a host would have written them.
module tb_lama_bank;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  localparam int NSA = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, host_rvalid, wr_stall, mask_active;
  bank_cmd_t cmd; line_t [1:0] host_wdata; line_t host_rdata;
  line_t got [$];
  int stall_cycles = 0, mask_cycles = 0;

  lama_bank #(.NUM_SA(NSA)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .host_wdata,
                                 .host_rdata, .host_rvalid, .wr_stall, .mask_active);

  always @(posedge clk) begin
    if (host_rvalid) got.push_back(host_rdata);
    if (wr_stall) stall_cycles++;
    if (mask_active) mask_cycles++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got_v, int exp);
    checks++;
    if (got_v != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got_v, exp); end
  endtask

  // issue one command and return the cycles until the bank accepts the next one
  task automatic send(bank_cmd_t c, output int cyc);
    @(negedge clk); cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!cmd_ready) begin @(negedge clk); cyc++; end
  endtask
  task automatic s(bank_cmd_t c); int cyc; send(c, cyc); endtask

  function automatic bank_cmd_t mk(cmd_op_e op, int sa = 0, int row = 0, int col = 0);
    bank_cmd_t c = '0;
    c.op = op; c.sa = 6'(sa); c.row = 9'(row); c.col = 6'(col);
    return c;
  endfunction

  initial begin
    bank_cmd_t c; int cyc; line_t wd0, wd1; byte_t bv [32]; int a;
    cmd_valid = 0; cmd = '0; host_wdata = '{default: '0};
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. ordinary write / read
    send(mk(CMD_ACT, 0, 5), cyc); chk("tRCD", cyc, 1 + T_RCD);
    for (int m = 0; m < 16; m++) begin wd0[m] = 8'($urandom); wd1[m] = 8'($urandom); end
    host_wdata[0] = wd0; host_wdata[1] = wd1;
    s(mk(CMD_WR, 0, 5, 10));
    got.delete();
    s(mk(CMD_RD, 0, 5, 10));
    chk("rd lines", got.size(), 2);
    if (got.size() == 2) begin chk("rd0", int'(got[0] == wd0), 1); chk("rd1", int'(got[1] == wd1), 1); end
    chk("cells", dut.u_dram.mem[0][5][3][11], wd1[3]);
    s(mk(CMD_WR, 0, 5, 20));
    send(mk(CMD_PRE, 0), cyc);
    chk("write recovery stalled", int'(stall_cycles > 0), 1);

    // 2. 8-bit multiplication, p = 2
    a = 8'd201;
    for (int k = 0; k < 8; k++)
      for (int b = 32 * k; b < 32 * k + 32; b++) begin
        int pr;
        pr = a * b;
        for (int m = k; m < 16; m += 8) begin
          dut.u_dram.mem[1][a][m][2 * (b % 32)]     = 8'(pr);
          dut.u_dram.mem[1][a][m][2 * (b % 32) + 1] = 8'(pr >> 8);
        end
      end
    for (int e = 0; e < 32; e++) begin bv[e] = 8'($urandom); dut.u_dram.mem[0][7][e % 16][e / 16] = bv[e]; end
    c = mk(CMD_CFG); c.cfg = '{prec: 8, wide: 1}; s(c);
    s(mk(CMD_ACT, 0, 7));
    c = mk(CMD_IRD, 0, 7, 0); c.two = 1; c.line = 0; s(c);
    s(mk(CMD_ACT, 1, a));
    got.delete();
    for (int r = 0; r < 4; r++) begin
      c = mk(CMD_LUTR, 1); c.base = 6'(2 * r); send(c, cyc);
      chk("lutr 8b cycles", cyc, 2 * (2 + T_CL + 2 + 1) + (r == 3 ? 1 : 0));
    end
    chk("8b lines", got.size(), 1);
    if (got.size() == 1)
      for (int e = 0; e < 8; e++) chk("8b product", {got[0][2 * e + 1], got[0][2 * e]}, a * bv[e]);
    chk("mask was active", int'(mask_cycles > 0), 1);

    // 3. 4-bit multiplication, p = 16, mask bypassed
    a = 13;
    for (int m = 0; m < 16; m++) for (int b = 0; b < 16; b++) dut.u_dram.mem[1][a][m][b] = 8'(a * b);
    for (int e = 0; e < 32; e++) begin bv[e] = 8'($urandom_range(0, 15)); dut.u_dram.mem[0][7][e % 16][e / 16] = bv[e]; end
    c = mk(CMD_CFG); c.cfg = '{prec: 4, wide: 0}; s(c);
    c = mk(CMD_IRD, 0, 7, 0); c.two = 1; c.line = 0; s(c);
    s(mk(CMD_PRE, 1)); s(mk(CMD_ACT, 1, a));
    got.delete(); mask_cycles = 0;
    for (int r = 0; r < 2; r++) begin
      c = mk(CMD_LUTR, 1); c.base = 6'(16 * r); send(c, cyc);
      chk("lutr 4b cycles", cyc, 2 + T_CL + 2);
    end
    chk("4b lines", got.size(), 2);
    if (got.size() == 2)
      for (int e = 0; e < 32; e++) chk("4b product", got[e / 16][e % 16], a * bv[e]);
    chk("mask bypassed", mask_cycles, 0);

    // 4. counting step on weight exponents (term 2), 4-bit exponents, p = 16
    begin
      byte_t w [16]; byte_t prev [16]; byte_t actv;
      actv = {1'b1, 7'd3};
      for (int m = 0; m < 16; m++) begin
        w[m] = {1'($urandom), 3'b0, 4'($urandom)};
        dut.u_dram.mem[0][9][m][0] = w[m];
      end
      s(mk(CMD_PRE, 0)); s(mk(CMD_ACT, 0, 9));
      c = mk(CMD_IRD, 0, 9, 0); c.two = 0; c.line = 0; s(c);
      c = mk(CMD_LDACT); c.act = actv; s(c);
      s(mk(CMD_ACT, 2, 4));
      for (int m = 0; m < 16; m++) prev[m] = dut.u_dram.mem[2][4][m][7'(w[m][6:0]) + 32];
      c = mk(CMD_CNT, 2); c.src = SRC_WGT; c.wline = 0; c.line = 2; c.cglog2 = 0; c.coff = 6'd32;
      s(c);
      for (int m = 0; m < 16; m++)
        chk("count", dut.u_dram.mem[2][4][m][7'(w[m][6:0]) + 32],
            8'(prev[m] + ((w[m][7] == actv[7]) ? 1 : -1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
