// tb_lama_dram_bank: self-checking test of the DRAM bank model. Rows in two subarrays are kept
// open at once, bytes are written and read with a different column in every mat, data must
// survive precharge and re-activation, and read data must arrive exactly RD_LAT cycles after
// the column command. A shadow array in the test is the reference.
module tb_lama_dram_bank;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  localparam int NSA = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic act, pre, col_rd, col_wr, rd_valid; logic [SA_W-1:0] act_sa, pre_sa, col_sa;
  logic [ROW_W-1:0] act_row; col_vec_t col_addr; logic [NUM_MATS-1:0] wr_mask;
  line_t wr_data, rd_data;
  byte_t shadow [NSA][4][16][64];   // rows 0..3 used
  logic [ROW_W-1:0] rowof [NSA];

  lama_dram_bank #(.NUM_SA(NSA)) dut (.clk, .rst_n, .act, .act_sa, .act_row, .pre, .pre_sa,
    .col_sa, .col_addr, .col_rd, .col_wr, .wr_mask, .wr_data, .rd_data, .rd_valid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic do_act(int sa, int row);
    @(negedge clk); act = 1; act_sa = 6'(sa); act_row = 9'(row); rowof[sa] = 9'(row);
    @(negedge clk); act = 0;
  endtask
  task automatic do_pre(int sa);
    @(negedge clk); pre = 1; pre_sa = 6'(sa); @(negedge clk); pre = 0;
  endtask

  initial begin
    act = 0; pre = 0; col_rd = 0; col_wr = 0; act_sa = 0; pre_sa = 0; col_sa = 0; act_row = 0;
    col_addr = '0; wr_mask = '1; wr_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // fill rows 0..3 of every subarray through ordinary writes
    for (int sa = 0; sa < NSA; sa++)
      for (int r = 0; r < 4; r++) begin
        do_act(sa, r);
        for (int c = 0; c < 64; c++) begin
          @(negedge clk); col_wr = 1; col_sa = 6'(sa); wr_mask = '1;
          for (int m = 0; m < 16; m++) begin
            col_addr[m] = 6'(c); wr_data[m] = 8'($urandom); shadow[sa][r][m][c] = wr_data[m];
          end
        end
        @(negedge clk); col_wr = 0;
        do_pre(sa);
      end
    // two subarrays open at the same time, random per-mat reads, masked writes
    do_act(1, 2); do_act(3, 1);
    for (int t = 0; t < 300; t++) begin
      int sa, lat; line_t e;
      sa = ($urandom_range(0, 1) == 0) ? 1 : 3;
      @(negedge clk); col_sa = 6'(sa);
      for (int m = 0; m < 16; m++) col_addr[m] = 6'($urandom);
      if ($urandom_range(0, 3) == 0) begin
        col_wr = 1; wr_mask = 16'($urandom);
        for (int m = 0; m < 16; m++) begin
          wr_data[m] = 8'($urandom);
          if (wr_mask[m]) shadow[sa][rowof[sa]][m][col_addr[m]] = wr_data[m];
        end
        @(negedge clk); col_wr = 0;
      end else begin
        for (int m = 0; m < 16; m++) e[m] = shadow[sa][rowof[sa]][m][col_addr[m]];
        col_rd = 1; @(negedge clk); col_rd = 0; lat = 1;
        while (!rd_valid && lat < 40) begin @(negedge clk); lat++; end
        chk("latency", lat, T_CL);
        for (int m = 0; m < 16; m++) chk("rd byte", rd_data[m], e[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
