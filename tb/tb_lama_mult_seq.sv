// tb_lama_mult_seq: self-checking test of the bulk-multiplication command sequencer driving a
// Lama bank. A multiplication LUT (row a holds a*b for every b) is placed in the compute
// subarray, a vector of operands b in the source subarray, and a batch c_i = a * b_i is run.
//   INT4, 256 operands : results checked, and the command count of one bank checked against the
//                        published 28 commands (2 ACT, 8 IRD, 16 LUTR, 2 PRE) per 256 products.
//   INT8, 1056 operands: 16-bit results through the mask logic, the batch runs over the end of
//                        a 1024-element source row so the source row is precharged and re-opened.
// Results arrive on the host port as 16-byte lines and are checked against a*b.
module tb_lama_mult_seq;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  localparam int NSA = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, cmd_valid, cmd_ready, host_rvalid, wr_stall, mask_active;
  byte_t a; logic [3:0] prec; logic [15:0] n_elems, n_cmds, n_acts;
  bank_cmd_t cmd; line_t host_rdata;
  line_t got [$];

  lama_mult_seq u_seq (.clk, .rst_n, .start, .a, .prec, .src_sa(6'd0), .src_row(9'd100),
                       .cmp_sa(6'd2), .lut_row(9'd0), .n_elems, .cmd_valid, .cmd_ready, .cmd,
                       .busy, .done, .n_cmds, .n_acts);
  lama_bank #(.NUM_SA(NSA)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
                                 .host_wdata('{default: '0}), .host_rdata, .host_rvalid,
                                 .wr_stall, .mask_active);

  always @(posedge clk) if (host_rvalid) got.push_back(host_rdata);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got_v, int exp);
    checks++;
    if (got_v != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got_v, exp); end
  endtask

  // fill LUT row a of the compute subarray for precision pr and store n random operands
  task automatic run(int av, int pr, int n, output byte_t bv [$]);
    bit wide; int gl, ent;
    wide = pr > 4; ent = wide ? 5 : 6; gl = pr > ent ? pr - ent : 0;
    for (int b = 0; b < (1 << pr); b++) begin
      int prod, col, msel;
      prod = av * b;
      msel = b >> ent;
      col  = b % (1 << ent);
      for (int m = msel; m < 16; m += (1 << gl))
        if (wide) begin
          dut.u_dram.mem[2][av][m][2 * col]     = 8'(prod);
          dut.u_dram.mem[2][av][m][2 * col + 1] = 8'(prod >> 8);
        end else dut.u_dram.mem[2][av][m][col] = 8'(prod);
    end
    bv.delete();
    for (int e = 0; e < n; e++) begin
      byte_t b;
      b = 8'($urandom_range(0, (1 << pr) - 1));
      bv.push_back(b);
      // element e: row 100 + e/1024, byte-column 2*((e%1024)/32) + (e%32)/16, mat e%16
      dut.u_dram.mem[0][100 + e / 1024][e % 16][2 * ((e % 1024) / 32) + (e % 32) / 16] = b;
    end
    got.delete();
    @(negedge clk); a = 8'(av); prec = 4'(pr); n_elems = 16'(n); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    byte_t bv [$]; int per, ndone, cyc0;
    start = 0; a = 0; prec = 4; n_elems = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // INT4: 256 products in one bank
    cyc0 = $time;
    run(11, 4, 256, bv);
    $display("INT4 256 products: %0d cycles", ($time - cyc0) / 2);
    chk("int4 cmds", n_cmds, 28);
    chk("int4 acts", n_acts, 2);
    chk("int4 lines", got.size(), 16);
    for (int e = 0; e < 256 && e / 16 < got.size(); e++) chk("int4 product", got[e / 16][e % 16], 11 * bv[e]);

    // INT8 over two source rows
    run(237, 8, 1056, bv);
    chk("int8 acts", n_acts, 3);
    chk("int8 cmds", n_cmds, 3 + 33 + 16 * 33 + 3);
    chk("int8 lines", got.size(), 132);
    for (int e = 0; e < 1056 && e / 8 < got.size(); e++)
      chk("int8 product", {got[e / 8][2 * (e % 8) + 1], got[e / 8][2 * (e % 8)]}, 237 * bv[e]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
