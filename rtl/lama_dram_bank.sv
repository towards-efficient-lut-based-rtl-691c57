// lama_dram_bank: behavioural model of the DRAM cell arrays of one HBM2 bank as used by Lama.
// This is a behavioural model, not synthesizable logic for a real part: DRAM mats, sense
// amplifiers, row decoder and column-select logic are analog and process-specific.
//
// Organisation: NUM_SA subarrays x 512 rows x 16 mats x 64 byte-columns (1 KB per row).
// Each subarray owns a local row buffer; because every mat has a tri-state isolation buffer after
// its column-select logic (subarray-level parallelism), several subarrays may keep a row open at
// the same time. Column commands go to one designated subarray (col_sa) and carry one 6-bit
// column per mat, so every mat can select a different byte of the open row: that is the
// independent column selection Lama relies on.
//
// Interface / timing:
//   act/act_sa/act_row : open a row (the model keeps the cells and reads them in place)
//   pre/pre_sa         : close the subarray's row
//   col_rd             : one internal column access; rd_data/rd_valid appear RD_LAT cycles later
//   col_wr             : one internal column access write, per-mat write enable wr_mask
// tRCD/tRP are enforced by the bank controller, not here. A column access to a subarray with
// no open row is a protocol error and is caught by an assertion.
module lama_dram_bank
  import lama_pkg::*;
#(
  parameter int NUM_SA = 64,
  parameter int RD_LAT = T_CL
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 act,
  input  logic [SA_W-1:0]      act_sa,
  input  logic [ROW_W-1:0]     act_row,
  input  logic                 pre,
  input  logic [SA_W-1:0]      pre_sa,
  input  logic [SA_W-1:0]      col_sa,
  input  col_vec_t             col_addr,
  input  logic                 col_rd,
  input  logic                 col_wr,
  input  logic [NUM_MATS-1:0]  wr_mask,
  input  line_t                wr_data,
  output line_t                rd_data,
  output logic                 rd_valid
);

  byte_t            mem [NUM_SA][SA_ROWS][NUM_MATS][MAT_COLS];
  logic [ROW_W-1:0] open_row [NUM_SA];
  logic [NUM_SA-1:0] is_open;

  line_t          pipe_d [RD_LAT];
  logic [RD_LAT-1:0] pipe_v;

  line_t rd_now;
  always_comb begin
    for (int m = 0; m < NUM_MATS; m++)
      rd_now[m] = mem[int'(col_sa) % NUM_SA][open_row[int'(col_sa) % NUM_SA]][m][col_addr[m]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      is_open <= '0;
      pipe_v  <= '0;
    end else begin
      if (pre) is_open[int'(pre_sa) % NUM_SA] <= 1'b0;
      if (act) begin
        is_open[int'(act_sa) % NUM_SA]  <= 1'b1;
        open_row[int'(act_sa) % NUM_SA] <= act_row;
      end
      pipe_v    <= {pipe_v[RD_LAT-2:0], col_rd};
      pipe_d[0] <= rd_now;
      for (int i = 1; i < RD_LAT; i++) pipe_d[i] <= pipe_d[i-1];
      if (col_wr)
        for (int m = 0; m < NUM_MATS; m++)
          if (wr_mask[m])
            mem[int'(col_sa) % NUM_SA][open_row[int'(col_sa) % NUM_SA]][m][col_addr[m]] <= wr_data[m];
    end
  end

  assign rd_data  = pipe_d[RD_LAT-1];
  assign rd_valid = pipe_v[RD_LAT-1];

  // Column commands need an open row in the designated subarray.
  a_col_open: assert property (@(posedge clk) disable iff (!rst_n)
                               (col_rd || col_wr) |-> is_open[int'(col_sa) % NUM_SA]);
  // A row must be closed before another one of the same subarray is opened.
  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n)
                                 (act && !(pre && pre_sa == act_sa)) |-> !is_open[int'(act_sa) % NUM_SA]);

endmodule
