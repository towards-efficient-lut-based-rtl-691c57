// tb_lama_column_counter: self-checking test of the per-mat column counter/latch.
// Two counters (mat 5 and mat 4) receive the same random operations; the expected column,
// valid flag and latch value are computed here from the addressing rules written out
// directly (column = b[5:0] or {b[4:0],ica}; mat group select by the upper bits of b;
// counting index (i + coff) split into column and mat), not from the package functions.
module tb_lama_column_counter;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] op; logic lut_mode, cnt_mode; col_t addr_col; byte_t elem; op_cfg_t cfg;
  logic [2:0] cglog2, cmoff; col_t coff; byte_t occ_in; logic sign_w, sign_a;
  col_t col5, col4; byte_t q5, q4; logic v5, v4;

  lama_column_counter #(.MAT_ID(5)) u5 (.clk, .rst_n, .op, .lut_mode, .cnt_mode, .addr_col, .elem,
    .cfg, .cglog2, .cmoff, .coff, .occ_in, .sign_w, .sign_a, .col_addr(col5), .latch_q(q5), .valid(v5));
  lama_column_counter #(.MAT_ID(4)) u4 (.clk, .rst_n, .op, .lut_mode, .cnt_mode, .addr_col, .elem,
    .cfg, .cglog2, .cmoff, .coff, .occ_in, .sign_w, .sign_a, .col_addr(col4), .latch_q(q4), .valid(v4));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_valid(int mat, byte_t b, op_cfg_t c, bit cm, int cg, int mo, int co);
    int g, ent, sel;
    if (cm) begin
      g = 1 << cg;
      sel = (mo + ((int'(b) + co) / 64)) % g;
      return (mat % g) == sel;
    end
    ent = c.wide ? 32 : 64;
    g = (1 << c.prec) / ent; if (g < 1) g = 1;
    sel = (int'(b) / ent) % g;
    return (mat % g) == sel;
  endfunction

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int e5, e4;
    op = 0; lut_mode = 0; cnt_mode = 0; addr_col = 0; elem = 0; cfg = '{prec: 4, wide: 0};
    cglog2 = 0; cmoff = 0; coff = 0; occ_in = 0; sign_w = 0; sign_a = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // conventional: address register, then increment
    op = 1; addr_col = 6'd37; @(negedge clk); chk("conv col", col5, 37); chk("conv col m4", col4, 37);
    op = 2; @(negedge clk); chk("conv inc", col5, 38);
    op = 2; addr_col = 6'd63; op = 1; @(negedge clk); op = 2; @(negedge clk); chk("wrap", col5, 0);
    // LUT mode, 8-bit multiplication: {b[4:0],0} then {b[4:0],1}; mat = b[7:5]
    cfg = '{prec: 8, wide: 1}; lut_mode = 1; elem = 8'hB7; op = 1; #0.1;
    chk("v5 8b", v5, 1); chk("v4 8b", v4, 0);
    @(negedge clk); chk("8b ica1", col5, 46);
    op = 2; @(negedge clk); chk("8b ica2", col5, 47);
    // random LUT-mode addresses
    for (int i = 0; i < 400; i++) begin
      int pr; bit w;
      w = $urandom_range(0, 1);
      pr = w ? $urandom_range(5, 8) : $urandom_range(3, 7);
      cfg = '{prec: 4'(pr), wide: w}; elem = 8'($urandom_range(0, (1 << pr) - 1));
      lut_mode = 1; cnt_mode = 0; op = 1;
      #0.1;
      chk("lut v5", v5, ref_valid(5, elem, cfg, 0, 0, 0, 0));
      chk("lut v4", v4, ref_valid(4, elem, cfg, 0, 0, 0, 0));
      @(negedge clk);
      chk("lut col", col5, w ? ((elem % 32) * 2) : (elem % 64));
      op = 2; @(negedge clk);
      chk("lut col2", col5, w ? ((elem % 32) * 2 + 1) : ((elem + 1) % 64));
    end
    // counting mode: load index address, load occurrence, count with signs
    for (int i = 0; i < 400; i++) begin
      int cg, mo, co;
      cnt_mode = 1; lut_mode = 1;
      cg = $urandom_range(0, 2); mo = $urandom_range(0, (1 << cg) - 1); co = $urandom_range(0, 1) * 32;
      cglog2 = 3'(cg); cmoff = 3'(mo); coff = 6'(co);
      elem = 8'($urandom_range(0, 127));
      op = 1; @(negedge clk);
      chk("cnt col", col5, (int'(elem) + co) % 64);
      occ_in = 8'($urandom); e5 = occ_in; e4 = occ_in; op = 3; @(negedge clk);
      chk("occ load", q5, e5);
      sign_w = $urandom_range(0, 1); sign_a = $urandom_range(0, 1); op = 4;
      if (ref_valid(5, elem, cfg, 1, cg, mo, co)) e5 = (sign_w == sign_a) ? (e5 + 1) % 256 : (e5 + 255) % 256;
      if (ref_valid(4, elem, cfg, 1, cg, mo, co)) e4 = (sign_w == sign_a) ? (e4 + 1) % 256 : (e4 + 255) % 256;
      @(negedge clk);
      chk("count m5", q5, e5); chk("count m4", q4, e4);
      op = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
