// tb_lama_temp_buffer: self-checking test of the 64-byte temporary buffer: line writes and
// reads against a byte-array model, and the element broadcast to the 16 column counters
// (counter m gets byte base + (m >> glog2)) for every group size.
module tb_lama_temp_buffer;
  timeunit 1ns; timeprecision 100ps;
  import lama_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en; logic [1:0] wr_line, rd_line; line_t wr_data, rd_data, elems, wgts;
  logic [5:0] el_base, w_base; logic [2:0] el_glog2;
  byte_t model [64];

  lama_temp_buffer dut (.clk, .wr_en, .wr_line, .wr_data, .rd_line, .rd_data,
                        .el_base, .w_base, .el_glog2, .elems, .wgts);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    wr_en = 0; wr_line = 0; rd_line = 0; wr_data = '0; el_base = 0; w_base = 0; el_glog2 = 0;
    for (int l = 0; l < 4; l++) begin
      @(negedge clk); wr_en = 1; wr_line = 2'(l);
      for (int m = 0; m < 16; m++) begin wr_data[m] = 8'($urandom); model[l * 16 + m] = wr_data[m]; end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int l;
      if ($urandom_range(0, 2) == 0) begin
        l = $urandom_range(0, 3);
        wr_en = 1; wr_line = 2'(l);
        for (int m = 0; m < 16; m++) begin wr_data[m] = 8'($urandom); model[l * 16 + m] = wr_data[m]; end
        @(negedge clk); wr_en = 0;
      end
      rd_line = 2'($urandom_range(0, 3));
      el_glog2 = 3'($urandom_range(0, 3));
      el_base = 6'($urandom); w_base = 6'($urandom);
      #0.1;
      for (int m = 0; m < 16; m++) begin
        chk("rd", rd_data[m], model[rd_line * 16 + m]);
        chk("elem", elems[m], model[(el_base + (m >> el_glog2)) % 64]);
        chk("wgt", wgts[m], model[(w_base + (m >> el_glog2)) % 64]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
