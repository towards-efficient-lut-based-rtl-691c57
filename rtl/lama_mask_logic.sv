// lama_mask_logic: filters the useful bytes out of one internal column access when a LUT spans
// several mats, and packs them into 16-byte output lines.
//
// A LUT whose entries do not fit in one mat row spans g consecutive mats (g = 2, 4, 8 for 6-,
// 7- and 8-bit multiplication), so of the 16 bytes an ICA returns only p = 16/g are wanted:
// in each group of g mats, the one picked by the upper bits of that group's operand b. A
// 16:1 multiplexer on the I/O bus, driven by a small state machine, picks these p bytes one per
// cycle (serially, p cycles per ICA); they are written into a 16-byte serial-in/parallel-out
// buffer, which is emitted (out_valid for one cycle) when full. With p = 16 (g = 1) nothing
// needs filtering and the logic is bypassed combinationally.
//
// Byte placement (a choice of this design): for 8-bit results byte k of a retrieval goes to
// slot+k; for 16-bit results the low byte (first ICA) goes to 2(slot+k) and the high byte
// (second ICA) to 2(slot+k)+1, so each output line holds whole little-endian results in
// operand order. slot advances by p after the last ICA of a retrieval.
//
// Interface: in_valid/in_data is one ICA, ica says which byte of a 16-bit result it is; elems
// are the operands broadcast to the 16 column counters, held stable while busy. clear empties
// the buffer.
module lama_mask_logic
  import lama_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  op_cfg_t cfg,
  input  logic    clear,
  input  logic    in_valid,
  input  line_t   in_data,
  input  logic    ica,
  input  line_t   elems,
  output logic    busy,
  output logic    out_valid,
  output line_t   out_data
);

  typedef enum logic [1:0] {S_IDLE, S_SEL, S_EMIT} state_e;
  state_e     state;
  line_t      hold;      // captured ICA data
  line_t      buf_q;     // serial-in / parallel-out buffer
  logic [4:0] k;         // group being selected
  logic [4:0] slot;      // results already packed
  logic       ica_q;

  logic [2:0] glog2;
  logic [4:0] p;
  logic [3:0] sel;
  logic [3:0] pos;
  logic       bypass;

  always_comb begin
    glog2  = lut_glog2(cfg);
    p      = 5'(16 >> glog2);
    bypass = (glog2 == 3'd0);
    sel    = 4'((k << glog2) | 5'(lut_msel(cfg, elems[4'(k << glog2)])));
    pos    = cfg.wide ? 4'(((slot + k) << 1) | 5'(ica_q)) : 4'(slot + k);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      state <= S_IDLE;
      slot  <= '0;
      k     <= '0;
      ica_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && !bypass) begin
          hold  <= in_data;
          ica_q <= ica;
          k     <= '0;
          state <= S_SEL;
        end
        S_SEL: begin
          buf_q[pos] <= hold[sel];
          if (k == p - 5'd1) begin
            if (!cfg.wide || ica_q) begin
              if ((6'(slot + p) << cfg.wide) >= 6'd16) begin
                slot  <= '0;
                state <= S_EMIT;
              end else begin
                slot  <= slot + p;
                state <= S_IDLE;
              end
            end else state <= S_IDLE;
          end else k <= k + 5'd1;
        end
        S_EMIT: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = bypass ? in_valid : (state == S_EMIT);
  assign out_data  = bypass ? in_data  : buf_q;

endmodule
