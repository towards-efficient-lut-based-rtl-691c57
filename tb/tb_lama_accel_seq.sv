// tb_lama_accel_seq: self-checking test of the accelerator-mode sequencer driving a Lama bank.
// For exponent widths n = 4, 5, 6 and 7 a layer of 2 groups of 16 output neurons is set up:
// weights {S_W, int_W} in the source subarray (row = positional index of the activation,
// column = neuron group, mat = neuron), the exponent-sum LUT (row int_A holds int_A + int_W)
// in the compute subarray, and random start values in the counter rows. Several activations
// {S_A, int_A} are then processed one after another. A reference model applies, per neuron,
// +1 / -1 (equal / different signs) to the occurrence counters of int_A + int_W, int_W and int_A
// at the counter layout the sequencer uses; all counter rows are compared after each layer.
// The command count per activation is checked against the sequence the design defines.
module tb_lama_accel_seq;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  localparam int NSA = 4;
  localparam int SRC = 0, CMP = 1, C1 = 2, C2 = 3, WROW = 20, CROW = 200, NG = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, cmd_valid, cmd_ready, host_rvalid, wr_stall, mask_active;
  byte_t act; logic [ROW_W-1:0] act_idx; logic [3:0] prec;
  logic [15:0] n_cmds, n_acts;
  bank_cmd_t cmd; line_t host_rdata;
  byte_t refc [2][SA_ROWS][NUM_MATS][MAT_COLS];

  lama_accel_seq u_seq (.clk, .rst_n, .start, .act, .act_idx, .prec, .n_groups(7'(NG)),
                        .src_sa(6'(SRC)), .w_row(9'(WROW)), .cmp_sa(6'(CMP)), .lut_row(9'd0),
                        .c1_sa(6'(C1)), .c2_sa(6'(C2)), .cnt_row(9'(CROW)),
                        .cmd_valid, .cmd_ready, .cmd, .busy, .done, .n_cmds, .n_acts);
  lama_bank #(.NUM_SA(NSA)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
                                 .host_wdata('{default: '0}), .host_rdata, .host_rvalid,
                                 .wr_stall, .mask_active);

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

  // reference: apply one count to neuron (group j, neuron m) for term t with index idx
  task automatic ref_count(int n, int j, int m, int t, int idx, int delta);
    int cgl, g, pc, q, s, coff, moff, sa, cidx, row, mat;
    bit same;
    cgl  = (n == 6) ? 1 : (n == 7) ? 2 : 0;
    same = (n <= 4);
    g = 1 << cgl; pc = 16 / g; q = m / pc; s = m % pc;
    coff = 0; moff = 0;
    if (t == 2) coff = same ? (2 << n) : 0;
    if (t == 3) begin
      coff = same ? (3 << n) : (n == 5) ? 32 : 0;
      moff = (n == 6) ? 1 : (n == 7) ? 2 : 0;
    end
    sa   = (t == 1 || same) ? 0 : 1;
    cidx = idx + coff;
    row  = CROW + j * g + q;
    mat  = s * g + ((moff + (cidx >> 6)) & (g - 1));
    refc[sa][row][mat][cidx % 64] = 8'(refc[sa][row][mat][cidx % 64] + delta);
  endtask

  task automatic layer(int n, int nacts);
    int cgl, g, pl, same, exp_cmds;
    cgl = (n == 6) ? 1 : (n == 7) ? 2 : 0; g = 1 << cgl;
    pl = (n == 7) ? 8 : 16; same = (n <= 4);
    // exponent-sum LUT, one row per int_A
    for (int ia = 0; ia < (1 << n); ia++)
      for (int iw = 0; iw < (1 << n); iw++)
        for (int m = 0; m < 16; m++)
          if (n < 7 || (m % 2) == (iw >> 6)) dut.u_dram.mem[CMP][ia][m][iw % 64] = 8'(ia + iw);
    // random counters
    for (int r = CROW; r < CROW + NG * g; r++)
      for (int m = 0; m < 16; m++)
        for (int c = 0; c < 64; c++) begin
          refc[0][r][m][c] = 8'($urandom); dut.u_dram.mem[C1][r][m][c] = refc[0][r][m][c];
          refc[1][r][m][c] = 8'($urandom); dut.u_dram.mem[C2][r][m][c] = refc[1][r][m][c];
        end
    for (int k = 0; k < nacts; k++) begin
      byte_t a; int ia, idx;
      ia  = $urandom_range(0, (1 << n) - 1);
      a   = {1'($urandom), 7'(ia)};
      idx = $urandom_range(0, 7);
      for (int j = 0; j < NG; j++)
        for (int m = 0; m < 16; m++) begin
          byte_t w; int d;
          w = {1'($urandom), 7'($urandom_range(0, (1 << n) - 1))};
          dut.u_dram.mem[SRC][WROW + idx][m][j] = w;
          d = (w[7] == a[7]) ? 1 : -1;
          ref_count(n, j, m, 1, ia + w[6:0], d);
          ref_count(n, j, m, 2, w[6:0], d);
          ref_count(n, j, m, 3, ia, d);
        end
      @(negedge clk); act = a; act_idx = 9'(idx); prec = 4'(n); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      exp_cmds = 2 + NG * (1 + 16 / pl + g * (same ? 5 : 7)) + 2;
      chk($sformatf("cmds n=%0d", n), n_cmds, exp_cmds);
      chk($sformatf("acts n=%0d", n), n_acts, 2 + NG * g * (same ? 1 : 2));
    end
    repeat (4) @(negedge clk);
    for (int r = CROW; r < CROW + NG * g; r++)
      for (int m = 0; m < 16; m++)
        for (int c = 0; c < 64; c++) begin
          chk($sformatf("c1 n=%0d r%0d m%0d c%0d", n, r, m, c), dut.u_dram.mem[C1][r][m][c], refc[0][r][m][c]);
          chk($sformatf("c2 n=%0d r%0d m%0d c%0d", n, r, m, c), dut.u_dram.mem[C2][r][m][c], refc[1][r][m][c]);
        end
  endtask

  initial begin
    start = 0; act = 0; act_idx = 0; prec = 4;
    repeat (3) @(posedge clk); rst_n = 1;
    layer(4, 4);
    layer(5, 3);
    layer(6, 3);
    layer(7, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
