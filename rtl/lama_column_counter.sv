// lama_column_counter: one per-mat column address counter/latch of a Lama bank (16 per bank).
//
// Commodity DRAM has one column counter per bank, so all mats read the same column. Lama gives
// every mat its own counter, fed through a multiplexer either from the address register
// (conventional read/write) or from an operand element held in the temporary buffer (LUT mode),
// so each mat reads the LUT entry of a different operand. For 16-bit results the counter holds
// {b[4:0],0} for the first ICA and increments to {b[4:0],1} for the second.
//
// For the LLM accelerator mode the latch is widened to 8 bits and gets an up/down adder: the
// latch is loaded with an occurrence count fetched from the counter arrays and counts +1 when
// the signs of activation and weight agree and -1 when they differ. Only a counter whose mat
// holds the addressed counter of its output neuron (valid) counts; the others keep the fetched
// value ("latch mode"). The published text states that an XNOR result of 1 decrements; with the
// usual sign-bit encoding XNOR = 1 means equal signs, a positive product, so this design
// increments on XNOR = 1 to keep the dot product correct (a departure from the text).
//
// Index handling in counting mode: the counter array of a neuron starts at mat cmoff of the
// neuron's 2^cglog2 mats and at column coff; index i is at column (i + coff) mod 64 in mat
// cmoff + ((i + coff) >> 6).
//
// Timing: every operation takes effect at the next rising clock edge; outputs are registered
// except valid, which is combinational from the current element and configuration.
module lama_column_counter
  import lama_pkg::*;
#(
  parameter int MAT_ID = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] op,        // 0 hold, 1 load address, 2 increment, 3 load occurrence, 4 count
  input  logic       lut_mode,  // multiplexer: 1 = element from temp buffer, 0 = address register
  input  logic       cnt_mode,  // address/valid use the counting-step indexing
  input  col_t       addr_col,
  input  byte_t      elem,
  input  op_cfg_t    cfg,
  input  logic [2:0] cglog2,
  input  logic [2:0] cmoff,
  input  col_t       coff,
  input  byte_t      occ_in,
  input  logic       sign_w,
  input  logic       sign_a,
  output col_t       col_addr,
  output byte_t      latch_q,
  output logic       valid
);

  localparam logic [2:0] OP_HOLD = 3'd0, OP_LDA = 3'd1, OP_INC = 3'd2,
                         OP_LDO = 3'd3, OP_CNT = 3'd4;

  logic [8:0] cidx;
  logic [2:0] my_pos;
  logic [2:0] want;
  col_t       next_col;

  always_comb begin
    cidx = {1'b0, elem} + {3'b0, coff};
    if (cnt_mode) begin
      my_pos   = 3'(MAT_ID) & 3'((1 << cglog2) - 1);
      want     = (cmoff + 3'(cidx[8:6])) & 3'((1 << cglog2) - 1);
      next_col = cidx[5:0];
    end else begin
      my_pos   = 3'(MAT_ID) & 3'((1 << lut_glog2(cfg)) - 1);
      want     = lut_msel(cfg, elem);
      next_col = lut_col(cfg, elem, 1'b0);
    end
    valid = (my_pos == want);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) latch_q <= '0;
    else begin
      unique case (op)
        OP_LDA:  latch_q <= lut_mode ? {2'b00, next_col} : {2'b00, addr_col};
        OP_INC:  latch_q <= {2'b00, latch_q[5:0] + 6'd1};
        OP_LDO:  latch_q <= occ_in;
        OP_CNT:  if (valid) latch_q <= (sign_w ~^ sign_a) ? latch_q + 8'd1 : latch_q - 8'd1;
        default: ;
      endcase
    end
  end

  assign col_addr = latch_q[5:0];

endmodule
