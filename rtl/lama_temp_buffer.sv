// lama_temp_buffer: the 64-byte temporary buffer of a Lama bank.
//
// It holds operands fetched from the source subarray by an internal read (32 elements of b for
// bulk multiplication, 16 weights for the LLM accelerator), exponent sums returned by a LUT
// retrieval, and occurrence counts during a counting step. It is organised as four 16-byte
// lines; a line is written or read as a whole over the bank I/O bus.
//
// Towards the 16 column counters it broadcasts elements: counter m receives byte
// el_base + (m >> el_glog2), so with p = 16 each counter gets its own element and with p < 16
// each element goes to 16/p consecutive counters (one LUT spanning 16/p mats). A second,
// identical port (w_base) delivers the weight byte of the same output neuron, whose sign bit
// the counters need when counting. Element indices wrap modulo 64.
//
// Timing: writes take effect at the rising edge; reads and broadcasts are combinational.
module lama_temp_buffer
  import lama_pkg::*;
(
  input  logic        clk,
  input  logic        wr_en,
  input  logic [1:0]  wr_line,
  input  line_t       wr_data,
  input  logic [1:0]  rd_line,
  output line_t       rd_data,
  input  logic [5:0]  el_base,
  input  logic [5:0]  w_base,
  input  logic [2:0]  el_glog2,
  output line_t       elems,
  output line_t       wgts
);

  byte_t mem [TB_LINES*NUM_MATS];

  always_ff @(posedge clk)
    if (wr_en)
      for (int m = 0; m < NUM_MATS; m++) mem[{wr_line, 4'(m)}] <= wr_data[m];

  always_comb begin
    for (int m = 0; m < NUM_MATS; m++) begin
      rd_data[m] = mem[{rd_line, 4'(m)}];
      elems[m]   = mem[6'(el_base + 6'(m >> el_glog2))];
      wgts[m]    = mem[6'(w_base  + 6'(m >> el_glog2))];
    end
  end

endmodule
