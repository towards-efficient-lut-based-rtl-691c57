// lama_accel_seq: memory-controller sequencer of the LLM accelerator mode for one bank and
// one input activation (input-stationary dataflow).
//
// Weights and activations are exponentially quantized: a value is {S, int} with an n-bit
// exponent (n = 3..7) stored in a byte {sign, exponent}. A dot product then reduces to counting,
// per output neuron, how often each exponent sum int_A + int_W (term 1), each int_W (term 2)
// and each int_A (term 3) occurs, with +1/-1 by the sign product. For one activation the bank
// runs, for every group of 16 output neurons j:
//
//   step 1  IRD (one ICA, column j) of 16 weights W[i][16j..16j+15] into buffer line 0
//   step 2  LUTR of the exponent-sum LUT (row int_A of the compute subarray) -> line 1
//           (one ICA for n <= 6, two with mask filtering for n = 7)
//   step 3  for every pass q over the neurons: ACT the counter row, CNT term 1, 2, 3, PRE
//
// with the weight row (row w_row + act_idx) and the LUT row opened once per activation.
// Counter layout (after the published 6-bit example; the rest is this design's choice):
//   n <= 4 : p = 16, all three arrays in one mat of one row (columns 0, 2^(n+1), 3*2^n)
//   n  = 5 : p = 16, term 1 in subarray c1, terms 2 and 3 in c2 at columns 0 and 32
//   n  = 6 : p = 8,  term 1 over 2 mats in c1; term 2 / term 3 in mat 0 / 1 of c2
//   n  = 7 : p = 4,  term 1 over 4 mats in c1; term 2 / term 3 in mats 0-1 / 2-3 of c2
// The counter row of pass q of group j is cnt_row + j*(16/p) + q in both subarrays.
// Term 4 (the sign sum) and the final scaling happen on the logic die and are not built here.
module lama_accel_seq
  import lama_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  byte_t            act,        // {S_A, int_A}
  input  logic [ROW_W-1:0] act_idx,    // positional index of the activation
  input  logic [3:0]       prec,       // exponent bits n (3..7)
  input  logic [6:0]       n_groups,   // groups of 16 output neurons in this bank (1..64)
  input  logic [SA_W-1:0]  src_sa,
  input  logic [ROW_W-1:0] w_row,
  input  logic [SA_W-1:0]  cmp_sa,
  input  logic [ROW_W-1:0] lut_row,
  input  logic [SA_W-1:0]  c1_sa,
  input  logic [SA_W-1:0]  c2_sa,
  input  logic [ROW_W-1:0] cnt_row,
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output bank_cmd_t        cmd,
  output logic             busy,
  output logic             done,
  output logic [15:0]      n_cmds,
  output logic [15:0]      n_acts
);

  typedef enum logic [3:0] {
    Q_IDLE, Q_CFG, Q_LDACT, Q_ACT_SRC, Q_ACT_CMP, Q_IRD, Q_LUTR,
    Q_ACT_C1, Q_CNT1, Q_ACT_C2, Q_CNT2, Q_CNT3, Q_PRE_C1, Q_PRE_C2, Q_PRE_SRC, Q_PRE_CMP
  } state_e;

  state_e           state;
  op_cfg_t          cfg;
  logic [6:0]       grp;
  logic [2:0]       q;         // pass over neurons
  logic [5:0]       lbase;     // LUTR element base
  logic [2:0]       cgl;       // log2 mats per neuron in the counter rows
  logic             same_sa;   // all terms in one row of c1
  logic [2:0]       moff2, moff3;
  col_t             coff2, coff3;
  logic [5:0]       pl, pc;
  logic [ROW_W-1:0] crow;
  logic             done_q;

  always_comb begin
    unique case (cfg.prec)
      4'd5:    begin cgl = 3'd0; same_sa = 1'b0; moff2 = 3'd0; moff3 = 3'd0; coff2 = 6'd0;  coff3 = 6'd32; end
      4'd6:    begin cgl = 3'd1; same_sa = 1'b0; moff2 = 3'd0; moff3 = 3'd1; coff2 = 6'd0;  coff3 = 6'd0;  end
      4'd7:    begin cgl = 3'd2; same_sa = 1'b0; moff2 = 3'd0; moff3 = 3'd2; coff2 = 6'd0;  coff3 = 6'd0;  end
      default: begin cgl = 3'd0; same_sa = 1'b1; moff2 = 3'd0; moff3 = 3'd0;
                     coff2 = 6'(2 << cfg.prec); coff3 = 6'(3 << cfg.prec); end
    endcase
    pl   = 6'(16 >> lut_glog2(cfg));
    pc   = 6'(16 >> cgl);
    crow = cnt_row + (ROW_W'(grp) << cgl) + ROW_W'(q);
  end

  always_comb begin
    cmd        = '0;
    cmd.cfg    = cfg;
    cmd.act    = act;
    cmd.wline  = 2'd0;
    cmd.iline  = 2'd1;
    cmd.line   = 2'd2;
    cmd.cglog2 = cgl;
    cmd.cbase  = 4'(q * pc);
    unique case (state)
      Q_CFG:     cmd.op = CMD_CFG;
      Q_LDACT:   cmd.op = CMD_LDACT;
      Q_ACT_SRC: begin cmd.op = CMD_ACT; cmd.sa = src_sa; cmd.row = w_row + act_idx; end
      Q_ACT_CMP: begin cmd.op = CMD_ACT; cmd.sa = cmp_sa; cmd.row = lut_row + ROW_W'(act[6:0]); end
      Q_IRD:     begin cmd.op = CMD_IRD; cmd.sa = src_sa; cmd.col = grp[5:0]; cmd.line = 2'd0; end
      Q_LUTR:    begin cmd.op = CMD_LUTR; cmd.sa = cmp_sa; cmd.base = lbase; cmd.to_tb = 1'b1; cmd.line = 2'd1; end
      Q_ACT_C1:  begin cmd.op = CMD_ACT; cmd.sa = c1_sa; cmd.row = crow; end
      Q_ACT_C2:  begin cmd.op = CMD_ACT; cmd.sa = c2_sa; cmd.row = crow; end
      Q_CNT1:    begin cmd.op = CMD_CNT; cmd.sa = c1_sa; cmd.src = SRC_SUM; end
      Q_CNT2:    begin cmd.op = CMD_CNT; cmd.sa = same_sa ? c1_sa : c2_sa; cmd.src = SRC_WGT;
                       cmd.cmoff = moff2; cmd.coff = coff2; end
      Q_CNT3:    begin cmd.op = CMD_CNT; cmd.sa = same_sa ? c1_sa : c2_sa; cmd.src = SRC_ACT;
                       cmd.cmoff = moff3; cmd.coff = coff3; end
      Q_PRE_C1:  begin cmd.op = CMD_PRE; cmd.sa = c1_sa; end
      Q_PRE_C2:  begin cmd.op = CMD_PRE; cmd.sa = c2_sa; end
      Q_PRE_SRC: begin cmd.op = CMD_PRE; cmd.sa = src_sa; end
      Q_PRE_CMP: begin cmd.op = CMD_PRE; cmd.sa = cmp_sa; end
      default:   cmd.op = CMD_NOP;
    endcase
    cmd_valid = (state != Q_IDLE);
  end

  assign busy = (state != Q_IDLE);
  assign done = done_q;

  // after the last PRE of a pass: next pass, next group of neurons, or close the rows
  logic last_q, last_g;
  assign last_q = !(6'(q) + 6'd1 < 6'(1 << cgl));
  assign last_g = !(grp + 7'd1 < n_groups);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= Q_IDLE;
      cfg    <= '0;
      grp    <= '0;
      q      <= '0;
      lbase  <= '0;
      n_cmds <= '0;
      n_acts <= '0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (cmd_valid && cmd_ready && !(cmd.op inside {CMD_CFG, CMD_LDACT})) n_cmds <= n_cmds + 16'd1;
      if (cmd_valid && cmd_ready && cmd.op == CMD_ACT) n_acts <= n_acts + 16'd1;
      if (state == Q_IDLE) begin
        if (start) begin
          cfg    <= '{prec: prec, wide: 1'b0};
          grp    <= '0;
          n_cmds <= '0;
          n_acts <= '0;
          state  <= Q_CFG;
        end
      end else if (cmd_ready) begin
        unique case (state)
          Q_CFG:     state <= Q_LDACT;
          Q_LDACT:   state <= Q_ACT_SRC;
          Q_ACT_SRC: state <= Q_ACT_CMP;
          Q_ACT_CMP: state <= Q_IRD;
          Q_IRD:     begin lbase <= '0; state <= Q_LUTR; end
          Q_LUTR:    if (lbase + pl >= 6'd16) begin q <= '0; state <= Q_ACT_C1; end
                     else lbase <= lbase + pl;
          Q_ACT_C1:  state <= Q_CNT1;
          Q_CNT1:    state <= same_sa ? Q_CNT2 : Q_ACT_C2;
          Q_ACT_C2:  state <= Q_CNT2;
          Q_CNT2:    state <= Q_CNT3;
          Q_CNT3:    state <= Q_PRE_C1;
          Q_PRE_C1, Q_PRE_C2:
            if (state == Q_PRE_C1 && !same_sa) state <= Q_PRE_C2;
            else if (!last_q) begin q <= q + 3'd1; state <= Q_ACT_C1; end
            else if (!last_g) begin grp <= grp + 7'd1; state <= Q_IRD; end
            else state <= Q_PRE_SRC;
          Q_PRE_SRC: state <= Q_PRE_CMP;
          Q_PRE_CMP: begin state <= Q_IDLE; done_q <= 1'b1; end
          default:   state <= Q_IDLE;
        endcase
      end
    end
  end

endmodule
