// lama_mult_seq: memory-controller sequencer for one operand-coalesced batch of bulk
// multiplication (or any two-operand LUT function) on one Lama bank.
//
// A batch applies f(a, b_i) to a scalar a and a vector b. The vector is stored one byte per
// element (zero-padded) in rows of the source subarray, starting at row src_row (the scalar's
// positional index), 1024 elements per row, elements 32k..32k+31 at byte-columns 2k and 2k+1
// of the 16 mats. The LUT of f sits in the compute subarray, one row per value of a, starting
// at lut_row. The command stream is:
//
//   CFG(prec)  ACT src  IRD(col 0)  ACT cmp(lut_row + a)  LUTR x 32/p
//              IRD(col 2)  LUTR x 32/p  ...   (next source row: PRE src, ACT src, ...)
//   PRE src  PRE cmp
//
// so the LUT row is activated once per batch and kept open (open-page policy). p is 16 for
// 4- and 5-bit operands and 8, 4, 2 for 6, 7, 8 bits; results wider than 8 bits (prec > 4)
// are 16-bit and each LUTR takes two ICAs. n_elems must be a multiple of 32 (this design's
// restriction). n_cmds / n_acts count the DRAM commands issued (CFG not counted).
module lama_mult_seq
  import lama_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  byte_t            a,
  input  logic [3:0]       prec,
  input  logic [SA_W-1:0]  src_sa,
  input  logic [ROW_W-1:0] src_row,
  input  logic [SA_W-1:0]  cmp_sa,
  input  logic [ROW_W-1:0] lut_row,
  input  logic [15:0]      n_elems,
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output bank_cmd_t        cmd,
  output logic             busy,
  output logic             done,
  output logic [15:0]      n_cmds,
  output logic [15:0]      n_acts
);

  typedef enum logic [3:0] {
    Q_IDLE, Q_CFG, Q_ACT_SRC, Q_IRD, Q_ACT_CMP, Q_LUTR, Q_PRE_SRC_ROW, Q_PRE_SRC, Q_PRE_CMP, Q_DONE
  } state_e;

  state_e           state;
  op_cfg_t          cfg;
  logic [ROW_W-1:0] row;
  col_t             col;
  logic [5:0]       base;
  logic [15:0]      left;
  logic             cmp_open;
  logic [5:0]       p;

  assign p = 6'(16 >> lut_glog2(cfg));

  always_comb begin
    cmd     = '0;
    cmd.cfg = cfg;
    unique case (state)
      Q_CFG:     cmd.op = CMD_CFG;
      Q_ACT_SRC: begin cmd.op = CMD_ACT; cmd.sa = src_sa; cmd.row = row; end
      Q_IRD:     begin cmd.op = CMD_IRD; cmd.sa = src_sa; cmd.col = col; cmd.two = 1'b1; cmd.line = 2'd0; end
      Q_ACT_CMP: begin cmd.op = CMD_ACT; cmd.sa = cmp_sa; cmd.row = lut_row + ROW_W'(a); end
      Q_LUTR:    begin cmd.op = CMD_LUTR; cmd.sa = cmp_sa; cmd.base = base; end
      Q_PRE_SRC_ROW, Q_PRE_SRC: begin cmd.op = CMD_PRE; cmd.sa = src_sa; end
      Q_PRE_CMP: begin cmd.op = CMD_PRE; cmd.sa = cmp_sa; end
      default:   cmd.op = CMD_NOP;
    endcase
    cmd_valid = !(state inside {Q_IDLE, Q_DONE});
  end

  assign busy = (state != Q_IDLE);
  assign done = (state == Q_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= Q_IDLE;
      n_cmds <= '0;
      n_acts <= '0;
      cfg    <= '0;
      row    <= '0;
      col    <= '0;
      base   <= '0;
      left   <= '0;
      cmp_open <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready && cmd.op != CMD_CFG) n_cmds <= n_cmds + 16'd1;
      if (cmd_valid && cmd_ready && cmd.op == CMD_ACT) n_acts <= n_acts + 16'd1;
      unique case (state)
        Q_IDLE: if (start) begin
          cfg      <= '{prec: prec, wide: (prec > 4'd4)};
          row      <= src_row;
          col      <= '0;
          left     <= n_elems;
          cmp_open <= 1'b0;
          n_cmds   <= '0;
          n_acts   <= '0;
          state    <= Q_CFG;
        end
        Q_CFG:     if (cmd_ready) state <= Q_ACT_SRC;
        Q_ACT_SRC: if (cmd_ready) state <= Q_IRD;
        Q_IRD:     if (cmd_ready) begin
          base  <= '0;
          state <= cmp_open ? Q_LUTR : Q_ACT_CMP;
        end
        Q_ACT_CMP: if (cmd_ready) begin cmp_open <= 1'b1; state <= Q_LUTR; end
        Q_LUTR:    if (cmd_ready) begin
          if (base + p >= 6'd32) begin
            left <= left - 16'd32;
            if (left <= 16'd32)      state <= Q_PRE_SRC;
            else if (col == 6'd62) begin
              col   <= '0;
              row   <= row + 1'b1;
              state <= Q_PRE_SRC_ROW;
            end else begin
              col   <= col + 6'd2;
              state <= Q_IRD;
            end
          end else base <= base + p;
        end
        Q_PRE_SRC_ROW: if (cmd_ready) state <= Q_ACT_SRC;
        Q_PRE_SRC: if (cmd_ready) state <= Q_PRE_CMP;
        Q_PRE_CMP: if (cmd_ready) state <= Q_DONE;
        Q_DONE:    state <= Q_IDLE;
        default:   state <= Q_IDLE;
      endcase
    end
  end

endmodule
