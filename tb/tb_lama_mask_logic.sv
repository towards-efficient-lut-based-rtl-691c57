// tb_lama_mask_logic: self-checking test of the mask logic.
// For several precisions it feeds random ICA data and random operands, predicts which mat of
// each group holds the wanted byte (upper bits of b: b[7:5] masked to the group size for 16-bit
// results, b[7:6] for 8-bit results) and where it lands in the packed 16-byte output, and checks
// the output line, the bypass for p = 16 and the serial latency of p cycles per ICA.
module tb_lama_mask_logic;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  op_cfg_t cfg; logic clear, in_valid, ica, busy, out_valid;
  line_t in_data, elems, out_data;

  lama_mask_logic dut (.clk, .rst_n, .cfg, .clear, .in_valid, .in_data, .ica, .elems,
                       .busy, .out_valid, .out_data);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // one ICA through the mask; returns the number of cycles until the logic is idle again
  task automatic one_ica(line_t d, bit ic, output int cyc, output bit emitted, output line_t o);
    cyc = 0; emitted = 0;
    @(negedge clk); in_data = d; ica = ic; in_valid = 1;
    @(negedge clk); in_valid = 0;
    while (busy) begin
      cyc++;
      if (out_valid) begin emitted = 1; o = out_data; end
      @(negedge clk);
    end
  endtask

  initial begin
    int pr, ent, g, p, nret, cyc, pos, msel;
    bit w, em;
    line_t d, o, exp;
    byte_t bk [16];
    cfg = '{prec: 4, wide: 0}; clear = 0; in_valid = 0; ica = 0; in_data = '0; elems = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // bypass: 4-bit and 5-bit operands
    for (int t = 0; t < 20; t++) begin
      cfg = (t % 2) ? '{prec: 4, wide: 0} : '{prec: 5, wide: 1};
      @(negedge clk);
      for (int m = 0; m < 16; m++) in_data[m] = 8'($urandom);
      in_valid = 1; #0.1;
      chk("bypass valid", out_valid, 1); chk("bypass data", int'(out_data == in_data), 1);
      chk("bypass not busy", busy, 0);
      @(negedge clk); in_valid = 0;
    end
    // filtered: (prec, wide) = (6,1) p=8, (7,1) p=4, (8,1) p=2, (7,0) p=8, (8,0) p=4
    for (int t = 0; t < 40; t++) begin
      case (t % 5)
        0: begin pr = 6; w = 1; end
        1: begin pr = 7; w = 1; end
        2: begin pr = 8; w = 1; end
        3: begin pr = 7; w = 0; end
        default: begin pr = 8; w = 0; end
      endcase
      @(negedge clk); cfg = '{prec: 4'(pr), wide: w}; clear = 1; @(negedge clk); clear = 0;
      ent = w ? 32 : 64; g = (1 << pr) / ent; p = 16 / g;
      nret = 16 / (p * (w ? 2 : 1));            // retrievals to fill one line
      for (int r = 0; r < nret; r++) begin
        for (int k = 0; k < p; k++) begin
          bk[k] = 8'($urandom_range(0, (1 << pr) - 1));
          for (int j = 0; j < g; j++) elems[k * g + j] = bk[k];
        end
        for (int ic = 0; ic < (w ? 2 : 1); ic++) begin
          for (int m = 0; m < 16; m++) d[m] = 8'($urandom);
          for (int k = 0; k < p; k++) begin
            msel = (int'(bk[k]) / ent) % g;
            pos = w ? 2 * (r * p + k) + ic : r * p + k;
            exp[pos] = d[k * g + msel];
          end
          one_ica(d, ic[0], cyc, em, o);
          chk("latency p+emit", cyc, p + int'(em));
          if (r == nret - 1 && ic == (w ? 1 : 0)) begin
            chk("emitted", em, 1);
            for (int m = 0; m < 16; m++) chk("byte", o[m], exp[m]);
          end else chk("not emitted", em, 0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
