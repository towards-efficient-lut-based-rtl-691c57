// tb_lama_pch: end-to-end test of a Lama pseudo-channel (8 banks, 64 subarrays each, all
// parameters at their defaults). It takes the design through its modes and counts each
// mechanism; a mechanism that never happened counts as a failure.
//   host path        : ACT / WR / RD / PRE through the host port of bank 2, with the PRE stalled
//                      by write recovery
//   bulk multiplication, two banks at once (bank-level parallelism):
//                      bank 0 INT4, 256 products, mask bypassed, LUT row opened once (open page)
//                      bank 1 INT8, 1056 products, mask filtering, source row re-opened
//   accelerator mode : one activation broadcast to all 8 banks (n = 4, one group of 16 neurons
//                      each); counters counted up for equal and down for different signs
// All results are checked against values computed here.
module tb_lama_pch;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NB-1:0] host_cmd_valid, host_cmd_ready, host_rvalid, mult_start, mult_busy, mult_done;
  logic [NB-1:0] accel_done, wr_stall, mask_active;
  bank_cmd_t host_cmd [NB]; line_t [1:0] host_wdata [NB]; line_t host_rdata [NB];
  mult_req_t mult_req [NB]; logic [15:0] mult_cmds [NB], mult_acts [NB], accel_cmds [NB];
  logic accel_start, accel_busy; byte_t accel_act; logic [ROW_W-1:0] accel_act_idx;
  logic [3:0] accel_prec; accel_layout_t accel_layout; logic [6:0] acc_groups [NB];

  lama_pch dut (.*);

  // mechanism counters
  int n_wr_stall = 0, n_mask_filter = 0, n_mask_bypass = 0, n_lut_reuse = 0, n_src_reopen = 0;
  int n_bank_par = 0, n_cnt_up = 0, n_cnt_down = 0, n_broadcast = 0, n_host_rd = 0;
  line_t got [NB][$];

  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) if (host_rvalid[b]) got[b].push_back(host_rdata[b]);
    if (|wr_stall) n_wr_stall++;
    if (mask_active[1]) n_mask_filter++;
    if (mult_busy[0] && mult_busy[1]) n_bank_par++;
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

  task automatic host(int b, cmd_op_e op, int sa, int row, int col);
    @(negedge clk);
    host_cmd[b] = '0; host_cmd[b].op = op; host_cmd[b].sa = 6'(sa);
    host_cmd[b].row = 9'(row); host_cmd[b].col = 6'(col);
    host_cmd_valid[b] = 1;
    while (!host_cmd_ready[b]) @(negedge clk);
    @(negedge clk); host_cmd_valid[b] = 0;
    while (!host_cmd_ready[b]) @(negedge clk);
  endtask

  // backdoor cell access of bank b (the generate index must be a constant)
  task automatic poke(int b, int sa, int row, int m, int c, byte_t v);
    case (b)
      0: dut.g_bank[0].u_bank.u_dram.mem[sa][row][m][c] = v;
      1: dut.g_bank[1].u_bank.u_dram.mem[sa][row][m][c] = v;
      2: dut.g_bank[2].u_bank.u_dram.mem[sa][row][m][c] = v;
      3: dut.g_bank[3].u_bank.u_dram.mem[sa][row][m][c] = v;
      4: dut.g_bank[4].u_bank.u_dram.mem[sa][row][m][c] = v;
      5: dut.g_bank[5].u_bank.u_dram.mem[sa][row][m][c] = v;
      6: dut.g_bank[6].u_bank.u_dram.mem[sa][row][m][c] = v;
      default: dut.g_bank[7].u_bank.u_dram.mem[sa][row][m][c] = v;
    endcase
  endtask
  function automatic byte_t peek(int b, int sa, int row, int m, int c);
    case (b)
      0: return dut.g_bank[0].u_bank.u_dram.mem[sa][row][m][c];
      1: return dut.g_bank[1].u_bank.u_dram.mem[sa][row][m][c];
      2: return dut.g_bank[2].u_bank.u_dram.mem[sa][row][m][c];
      3: return dut.g_bank[3].u_bank.u_dram.mem[sa][row][m][c];
      4: return dut.g_bank[4].u_bank.u_dram.mem[sa][row][m][c];
      5: return dut.g_bank[5].u_bank.u_dram.mem[sa][row][m][c];
      6: return dut.g_bank[6].u_bank.u_dram.mem[sa][row][m][c];
      default: return dut.g_bank[7].u_bank.u_dram.mem[sa][row][m][c];
    endcase
  endfunction

  // multiplication LUT for scalar a and operand vector in bank b
  task automatic setup_mult(int b, int av, int pr, int n, ref byte_t bv [$]);
    bit wide; int gl, ent;
    wide = pr > 4; ent = wide ? 5 : 6; gl = pr > ent ? pr - ent : 0;
    for (int x = 0; x < (1 << pr); x++) begin
      int prod, col;
      prod = av * x; col = x % (1 << ent);
      for (int m = x >> ent; m < 16; m += (1 << gl))
        if (wide) begin poke(b, 40, av, m, 2 * col, 8'(prod)); poke(b, 40, av, m, 2 * col + 1, 8'(prod >> 8)); end
        else poke(b, 40, av, m, col, 8'(prod));
    end
    bv.delete();
    for (int e = 0; e < n; e++) begin
      byte_t x;
      x = 8'($urandom_range(0, (1 << pr) - 1));
      bv.push_back(x);
      poke(b, 3, 300 + e / 1024, e % 16, 2 * ((e % 1024) / 32) + (e % 32) / 16, x);
    end
    mult_req[b] = '{a: 8'(av), prec: 4'(pr), src_sa: 6'd3, src_row: 9'd300, cmp_sa: 6'd40,
                    lut_row: 9'd0, n_elems: 16'(n)};
  endtask

  initial begin
    byte_t bv0 [$], bv1 [$];
    line_t wd0, wd1;
    byte_t act; int ia;
    byte_t wgt [NB][16];
    host_cmd_valid = '0; mult_start = '0; accel_start = 0; accel_act = 0; accel_act_idx = 0;
    accel_prec = 4; accel_layout = '0;
    for (int b = 0; b < NB; b++) begin
      host_cmd[b] = '0; host_wdata[b] = '{default: '0}; mult_req[b] = '0; acc_groups[b] = 7'd1;
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- host path on bank 2
    for (int m = 0; m < 16; m++) begin wd0[m] = 8'($urandom); wd1[m] = 8'($urandom); end
    host_wdata[2][0] = wd0; host_wdata[2][1] = wd1;
    host(2, CMD_ACT, 7, 33, 0);
    host(2, CMD_WR, 7, 0, 40);
    host(2, CMD_PRE, 7, 0, 0);
    host(2, CMD_ACT, 7, 33, 0);
    host(2, CMD_RD, 7, 0, 40);
    host(2, CMD_PRE, 7, 0, 0);
    chk("host rd lines", got[2].size(), 2);
    if (got[2].size() == 2) begin
      chk("host rd0", int'(got[2][0] == wd0), 1); chk("host rd1", int'(got[2][1] == wd1), 1);
      n_host_rd++;
    end
    chk("cell", peek(2, 7, 33, 5, 41), wd1[5]);

    // ---- two multiplication batches at once
    setup_mult(0, 9, 4, 256, bv0);
    setup_mult(1, 173, 8, 1056, bv1);
    @(negedge clk); mult_start = 2'b11;
    @(negedge clk); mult_start = '0;
    fork
      begin
        int mseen; mseen = 0;
        while (!mult_done[0]) begin @(negedge clk); if (mask_active[0]) mseen++; end
        if (mseen == 0) n_mask_bypass++;
      end
      while (!mult_done[1]) @(negedge clk);
    join
    repeat (3) @(negedge clk);
    if (mult_acts[0] == 2) n_lut_reuse++;
    if (mult_acts[1] == 3) n_src_reopen++;
    chk("int4 cmds", mult_cmds[0], 28);
    chk("int4 lines", got[0].size(), 16);
    for (int e = 0; e < 256 && e / 16 < got[0].size(); e++) chk("int4 product", got[0][e / 16][e % 16], 9 * bv0[e]);
    chk("int8 lines", got[1].size(), 132);
    for (int e = 0; e < 1056 && e / 8 < got[1].size(); e++)
      chk("int8 product", {got[1][e / 8][2 * (e % 8) + 1], got[1][e / 8][2 * (e % 8)]}, 173 * bv1[e]);

    // ---- accelerator mode: one activation to all banks, n = 4
    ia  = 5;
    act = {1'b1, 7'(ia)};
    for (int b = 0; b < NB; b++) begin
      for (int iw = 0; iw < 16; iw++) for (int m = 0; m < 16; m++) poke(b, 50, ia, m, iw, 8'(ia + iw));
      for (int m = 0; m < 16; m++) begin
        wgt[b][m] = {1'($urandom), 3'b0, 4'($urandom)};
        poke(b, 10, 64 + 3, m, 0, wgt[b][m]);
        for (int c = 0; c < 64; c++) poke(b, 60, 100, m, c, 8'd0);
      end
    end
    accel_layout = '{src_sa: 6'd10, w_row: 9'd64, cmp_sa: 6'd50, lut_row: 9'd0,
                     c1_sa: 6'd60, c2_sa: 6'd61, cnt_row: 9'd100};
    @(negedge clk); accel_act = act; accel_act_idx = 9'd3; accel_prec = 4'd4; accel_start = 1;
    @(negedge clk); accel_start = 0;
    begin
      logic [NB-1:0] seen; seen = '0;
      while (accel_busy) begin @(negedge clk); seen |= accel_done; end
      seen |= accel_done;
      if (&seen) n_broadcast++;
    end
    repeat (3) @(negedge clk);
    for (int b = 0; b < NB; b++)
      for (int m = 0; m < 16; m++) begin
        byte_t d; int iw;
        iw = wgt[b][m][3:0];
        d  = (wgt[b][m][7] == act[7]) ? 8'd1 : 8'hff;
        if (d == 8'd1) n_cnt_up++; else n_cnt_down++;
        chk("term1", peek(b, 60, 100, m, ia + iw), d);
        chk("term2", peek(b, 60, 100, m, 32 + iw), d);
        chk("term3", peek(b, 60, 100, m, 48 + ia), d);
        chk("untouched", peek(b, 60, 100, m, 31), 0);
      end

    $display("mechanisms: wr_stall=%0d mask_filter=%0d mask_bypass=%0d lut_reuse=%0d src_reopen=%0d",
             n_wr_stall, n_mask_filter, n_mask_bypass, n_lut_reuse, n_src_reopen);
    $display("            bank_parallel=%0d cnt_up=%0d cnt_down=%0d broadcast=%0d host_rd=%0d",
             n_bank_par, n_cnt_up, n_cnt_down, n_broadcast, n_host_rd);
    chk("mech wr_stall", int'(n_wr_stall > 0), 1);
    chk("mech mask_filter", int'(n_mask_filter > 0), 1);
    chk("mech mask_bypass", int'(n_mask_bypass > 0), 1);
    chk("mech lut_reuse", int'(n_lut_reuse > 0), 1);
    chk("mech src_reopen", int'(n_src_reopen > 0), 1);
    chk("mech bank_parallel", int'(n_bank_par > 0), 1);
    chk("mech cnt_up", int'(n_cnt_up > 0), 1);
    chk("mech cnt_down", int'(n_cnt_down > 0), 1);
    chk("mech broadcast", int'(n_broadcast > 0), 1);
    chk("mech host_rd", int'(n_host_rd > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
