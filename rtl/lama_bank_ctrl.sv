// lama_bank_ctrl: command sequencer of one Lama bank.
//
// The memory controller on the logic die sends bank commands (lama_pkg::bank_cmd_t) over a
// valid/ready handshake; one command is executed at a time. The controller turns each command
// into the cycle-by-cycle control of the DRAM array, the 16 column counters, the temporary
// buffer, the mask logic and the I/O bus arbiter, and it holds the operation configuration
// and the 8-bit activation buffer {S_A, int_A} of the LLM accelerator mode.
//
//   ACT   open a row, then wait tRCD            PRE   wait out tWR, close, wait tRP
//   RD    2 ICAs at col, col+1 -> host           WR    2 ICAs at col, col+1 <- host
//   IRD   internal read, 1 or 2 ICAs -> temporary-buffer lines (not sent to the host)
//   LUTR  LUT retrieval: counters load columns from the operands in the temporary buffer,
//         ICA, mask logic; for 16-bit results the counters increment and a second ICA + mask
//         follows. Results go to the host or to a temporary-buffer line.
//   CNT   counting step: counters load the counter-array columns from the indices, ICA fetch
//         of the occurrences into a temporary-buffer line, load them into the latches, count
//         up/down by the sign XNOR, write the latches back to the line, reload the columns
//         and write the line back into the open counter row.
//   LDACT load the activation buffer; TBRD send a temporary-buffer line to the host;
//   CFG   set precision / result width (clears the mask buffer).
//
// Timing (500 MHz cycles): ACT 1+T_RCD, PRE 1+T_RP (+ write-recovery stall), RD/IRD about
// T_CL+3, LUTR T_CL+2 (+p+1 mask cycles when p < 16) per ICA. The sequence of steps is the
// published one; the exact cycle split, the handshake and the write-recovery tracking are
// choices of this design.
module lama_bank_ctrl
  import lama_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  bank_cmd_t       cmd,
  // DRAM array
  output logic            d_act,
  output logic            d_pre,
  output logic [SA_W-1:0] d_sa,
  output logic [ROW_W-1:0] d_row,
  output logic            d_col_rd,
  output logic            d_col_wr,
  input  logic            rd_valid,
  // column counters
  output logic [2:0]      cc_op,
  output logic            cc_lut_mode,
  output logic            cc_cnt_mode,
  output col_t            cc_addr_col,
  output logic [1:0]      cc_src,
  output logic [2:0]      cc_glog2,
  output logic [2:0]      cc_moff,
  output col_t            cc_coff,
  // temporary buffer
  output logic            tb_wr_en,
  output logic [1:0]      tb_wr_line,
  output logic [1:0]      tb_rd_line,
  output logic [5:0]      tb_el_base,
  output logic [5:0]      tb_w_base,
  output logic [2:0]      tb_glog2,
  // mask logic
  output logic            m_clear,
  output logic            m_in_valid,
  output logic            m_ica,
  input  logic            m_busy,
  input  logic            m_out_valid,
  // bus arbiter
  output logic [4:0]      bus_req,
  output logic            gate_out,
  output logic            gate_in,
  // state
  output op_cfg_t         cfg_q,
  output byte_t           act_q,
  output logic            wr_stall
);

  typedef enum logic [4:0] {
    S_IDLE, S_WAIT, S_PRE_HOLD,
    S_CA_LD, S_CA_I1, S_CA_I2, S_CA_RET,
    S_WR_LD, S_WR_1, S_WR_2,
    S_LU_LD, S_LU_RD, S_LU_RET, S_LU_MASK,
    S_CN_LD, S_CN_RD, S_CN_RET, S_CN_LDO, S_CN_CNT, S_CN_WB, S_CN_LDA, S_CN_WR
  } state_e;

  state_e     state;
  bank_cmd_t  c;
  logic [4:0] wait_cnt;
  logic [4:0] wr_rec;
  logic       nret;       // returns received (RD/IRD)
  logic       ica;        // current ICA of a LUT retrieval

  localparam logic [2:0] OP_HOLD = 3'd0, OP_LDA = 3'd1, OP_INC = 3'd2,
                         OP_LDO = 3'd3, OP_CNT = 3'd4;
  localparam int R_GSA = 0, R_MASK = 1, R_TB = 2, R_CNT = 3, R_HOST = 4;

  assign cmd_ready = (state == S_IDLE);
  // an ACT is issued in the cycle it is accepted, so the address comes straight from the command
  assign d_sa      = (state == S_IDLE) ? cmd.sa  : c.sa;
  assign d_row     = (state == S_IDLE) ? cmd.row : c.row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
      wr_rec   <= '0;
      nret     <= 1'b0;
      ica      <= 1'b0;
      cfg_q    <= '{prec: 4'd4, wide: 1'b0};
      act_q    <= '0;
      c        <= '0;
    end else begin
      if (wr_rec != 0) wr_rec <= wr_rec - 5'd1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c    <= cmd;
          nret <= 1'b0;
          ica  <= 1'b0;
          unique case (cmd.op)
            CMD_ACT:   begin wait_cnt <= 5'(T_RCD); state <= S_WAIT; end
            CMD_PRE:   state <= S_PRE_HOLD;
            CMD_RD,
            CMD_IRD:   state <= S_CA_LD;
            CMD_WR:    state <= S_WR_LD;
            CMD_LUTR:  state <= S_LU_LD;
            CMD_CNT:   state <= S_CN_LD;
            CMD_LDACT: act_q <= cmd.act;
            CMD_CFG:   cfg_q <= cmd.cfg;
            default:   ;
          endcase
        end
        S_WAIT: if (wait_cnt <= 5'd1) state <= S_IDLE; else wait_cnt <= wait_cnt - 5'd1;
        S_PRE_HOLD: if (wr_rec == 0) begin wait_cnt <= 5'(T_RP); state <= S_WAIT; end
        // conventional and internal reads
        S_CA_LD: state <= S_CA_I1;
        S_CA_I1: state <= (c.op == CMD_RD || c.two) ? S_CA_I2 : S_CA_RET;
        S_CA_I2: state <= S_CA_RET;
        S_CA_RET: if (rd_valid) begin
          nret <= 1'b1;
          if (nret || (c.op == CMD_IRD && !c.two)) state <= S_IDLE;
        end
        // writes
        S_WR_LD: state <= S_WR_1;
        S_WR_1:  state <= S_WR_2;
        S_WR_2:  begin wr_rec <= 5'(T_WR); state <= S_IDLE; end
        // LUT retrieval
        S_LU_LD:  state <= S_LU_RD;
        S_LU_RD:  state <= S_LU_RET;
        S_LU_RET: if (rd_valid) state <= S_LU_MASK;
        S_LU_MASK: if (!m_busy) begin
          if (cfg_q.wide && !ica) begin
            ica   <= 1'b1;
            state <= S_LU_RD;
          end else state <= S_IDLE;
        end
        // counting step
        S_CN_LD:  state <= S_CN_RD;
        S_CN_RD:  state <= S_CN_RET;
        S_CN_RET: if (rd_valid) state <= S_CN_LDO;
        S_CN_LDO: state <= S_CN_CNT;
        S_CN_CNT: state <= S_CN_WB;
        S_CN_WB:  state <= S_CN_LDA;
        S_CN_LDA: state <= S_CN_WR;
        S_CN_WR:  begin wr_rec <= 5'(T_WR); state <= S_IDLE; end
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    d_act       = (state == S_IDLE) && cmd_valid && cmd.op == CMD_ACT;
    d_pre       = (state == S_PRE_HOLD) && (wr_rec == 0);
    d_col_rd    = (state == S_CA_I1) || (state == S_CA_I2) || (state == S_LU_RD) || (state == S_CN_RD);
    d_col_wr    = (state == S_WR_1) || (state == S_WR_2) || (state == S_CN_WR);
    wr_stall    = (state == S_PRE_HOLD) && (wr_rec != 0);

    cc_op       = OP_HOLD;
    cc_lut_mode = 1'b0;
    cc_cnt_mode = (c.op == CMD_CNT);
    cc_addr_col = c.col;
    cc_src      = c.src;
    cc_glog2    = (c.op == CMD_CNT) ? c.cglog2 : lut_glog2(cfg_q);
    cc_moff     = c.cmoff;
    cc_coff     = c.coff;
    unique case (state)
      S_CA_LD, S_WR_LD:  cc_op = OP_LDA;
      S_CA_I1, S_WR_1:   cc_op = OP_INC;
      S_LU_LD:           begin cc_op = OP_LDA; cc_lut_mode = 1'b1; end
      S_LU_RD:           cc_op = ica ? OP_HOLD : OP_INC;
      S_CN_LD, S_CN_LDA: begin cc_op = OP_LDA; cc_lut_mode = 1'b1; end
      S_CN_LDO:          cc_op = OP_LDO;
      S_CN_CNT:          cc_op = OP_CNT;
      default:           ;
    endcase

    tb_glog2   = cc_glog2;
    tb_el_base = (c.op == CMD_CNT) ? ((c.src == SRC_SUM) ? {c.iline, c.cbase} : {c.wline, c.cbase})
                                   : c.base;
    tb_w_base  = {c.wline, c.cbase};

    bus_req  = '0;
    gate_out = 1'b0;
    gate_in  = 1'b0;
    tb_wr_en = 1'b0;
    tb_wr_line = c.line;
    tb_rd_line = c.line;
    m_in_valid = 1'b0;
    m_ica      = ica;
    m_clear    = (state == S_IDLE) && cmd_valid && cmd.op == CMD_CFG;

    unique case (state)
      S_CA_RET: if (rd_valid) begin
        bus_req[R_GSA] = 1'b1;
        if (c.op == CMD_RD) gate_out = 1'b1;
        else begin
          tb_wr_en   = 1'b1;
          tb_wr_line = c.line + 2'(nret);
        end
      end
      S_WR_1, S_WR_2: begin bus_req[R_HOST] = 1'b1; gate_in = 1'b1; end
      S_LU_RET: m_in_valid = rd_valid;
      S_CN_RET: if (rd_valid) begin bus_req[R_GSA] = 1'b1; tb_wr_en = 1'b1; end
      S_CN_WB:  begin bus_req[R_CNT] = 1'b1; tb_wr_en = 1'b1; end
      S_CN_WR:  bus_req[R_TB] = 1'b1;
      default: ;
    endcase
    if ((state == S_LU_RET || state == S_LU_MASK) && m_out_valid) begin
      bus_req[R_MASK] = 1'b1;
      if (c.to_tb) tb_wr_en = 1'b1; else gate_out = 1'b1;
    end
    if (state == S_IDLE && cmd_valid && cmd.op == CMD_TBRD) begin
      bus_req[R_TB] = 1'b1;
      gate_out      = 1'b1;
      tb_rd_line    = cmd.line;
    end
  end

endmodule
