// lama_bank: one Lama-enabled HBM2 bank.
//
// Wires the DRAM cell arrays (behavioural model) to the logic Lama adds per bank: sixteen
// per-mat column counters/latches, the mask logic, the 64-byte temporary buffer, the 8-bit
// activation buffer (inside the controller), the I/O-bus arbiter with the bus gating towards
// the logic die, and the bank controller that sequences them.
//
// Data paths (all 16 bytes wide, one byte per mat):
//   DRAM read data  -> mask logic (LUT retrieval) or I/O bus (reads, internal reads, counting)
//   I/O bus         -> temporary buffer, DRAM write data, logic die (through the gating)
//   temporary buffer-> column counters (operands / indices broadcast), I/O bus
//   counter latches -> I/O bus (updated occurrence counts)
// The element a counter receives in a counting step is the exponent sum from the buffer
// (term 1), the weight exponent int_W (term 2, sign bit removed) or the activation exponent
// int_A from the activation buffer (term 3); the sign inputs are S_W of the neuron's weight
// and S_A.
//
// Interface: bank commands over cmd_valid/cmd_ready; host_wdata carries the 32 bytes of a WR
// and must stay valid while the command runs; host_rdata/host_rvalid deliver read data and
// LUT results, one 16-byte line per cycle.
module lama_bank
  import lama_pkg::*;
#(
  parameter int NUM_SA = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  bank_cmd_t  cmd,
  input  line_t [1:0] host_wdata,
  output line_t      host_rdata,
  output logic       host_rvalid,
  output logic       wr_stall,
  output logic       mask_active
);

  logic            d_act, d_pre, d_col_rd, d_col_wr, rd_valid;
  logic [SA_W-1:0] d_sa;
  logic [ROW_W-1:0] d_row;
  line_t           rd_data;
  col_vec_t        col_addr;

  logic [2:0] cc_op, cc_glog2, cc_moff;
  logic       cc_lut_mode, cc_cnt_mode;
  col_t       cc_addr_col, cc_coff;
  logic [1:0] cc_src;

  logic       tb_wr_en;
  logic [1:0] tb_wr_line, tb_rd_line;
  logic [5:0] tb_el_base, tb_w_base;
  logic [2:0] tb_glog2;
  line_t      tb_rd_data, tb_elems, tb_wgts;

  logic       m_clear, m_in_valid, m_ica, m_busy, m_out_valid;
  line_t      m_out_data;

  logic [4:0] bus_req, bus_gnt;
  logic       gate_out, gate_in, bus_valid, bus_stall;
  line_t      bus;
  line_t      cnt_latches;
  line_t      cc_elem;

  op_cfg_t    cfg_q;
  byte_t      act_q;
  logic       wr_sel;

  lama_bank_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .d_act, .d_pre, .d_sa, .d_row, .d_col_rd, .d_col_wr, .rd_valid,
    .cc_op, .cc_lut_mode, .cc_cnt_mode, .cc_addr_col, .cc_src, .cc_glog2, .cc_moff, .cc_coff,
    .tb_wr_en, .tb_wr_line, .tb_rd_line, .tb_el_base, .tb_w_base, .tb_glog2,
    .m_clear, .m_in_valid, .m_ica, .m_busy, .m_out_valid,
    .bus_req, .gate_out, .gate_in, .cfg_q, .act_q, .wr_stall
  );

  lama_dram_bank #(.NUM_SA(NUM_SA)) u_dram (
    .clk, .rst_n,
    .act(d_act), .act_sa(d_sa), .act_row(d_row),
    .pre(d_pre), .pre_sa(d_sa),
    .col_sa(d_sa), .col_addr, .col_rd(d_col_rd), .col_wr(d_col_wr),
    .wr_mask('1), .wr_data(bus), .rd_data, .rd_valid
  );

  always_comb begin
    for (int m = 0; m < NUM_MATS; m++) begin
      unique case (cc_src)
        SRC_WGT: cc_elem[m] = cc_cnt_mode ? {1'b0, tb_elems[m][6:0]} : tb_elems[m];
        SRC_ACT: cc_elem[m] = cc_cnt_mode ? {1'b0, act_q[6:0]}       : tb_elems[m];
        default: cc_elem[m] = tb_elems[m];
      endcase
    end
  end

  for (genvar m = 0; m < NUM_MATS; m++) begin : g_cc
    lama_column_counter #(.MAT_ID(m)) u_cc (
      .clk, .rst_n, .op(cc_op), .lut_mode(cc_lut_mode), .cnt_mode(cc_cnt_mode),
      .addr_col(cc_addr_col), .elem(cc_elem[m]), .cfg(cfg_q),
      .cglog2(cc_glog2), .cmoff(cc_moff), .coff(cc_coff),
      .occ_in(tb_rd_data[m]), .sign_w(tb_wgts[m][7]), .sign_a(act_q[7]),
      .col_addr(col_addr[m]), .latch_q(cnt_latches[m]), .valid()
    );
  end

  lama_temp_buffer u_tb (
    .clk, .wr_en(tb_wr_en), .wr_line(tb_wr_line), .wr_data(bus),
    .rd_line(tb_rd_line), .rd_data(tb_rd_data),
    .el_base(tb_el_base), .w_base(tb_w_base), .el_glog2(tb_glog2),
    .elems(tb_elems), .wgts(tb_wgts)
  );

  lama_mask_logic u_mask (
    .clk, .rst_n, .cfg(cfg_q), .clear(m_clear),
    .in_valid(m_in_valid), .in_data(rd_data), .ica(m_ica), .elems(tb_elems),
    .busy(m_busy), .out_valid(m_out_valid), .out_data(m_out_data)
  );

  // The second 16 bytes of a write are sent on the second write ICA.
  always_ff @(posedge clk)
    if (!rst_n) wr_sel <= 1'b0;
    else if (bus_gnt[4]) wr_sel <= ~wr_sel;

  lama_bus_arbiter u_arb (
    .req(bus_req), .src_gsa(rd_data), .src_mask(m_out_data), .src_tb(tb_rd_data),
    .src_cnt(cnt_latches), .src_host(host_wdata[wr_sel]),
    .gate_out, .gate_in, .gnt(bus_gnt), .bus, .bus_valid, .stall(bus_stall),
    .host_valid(host_rvalid)
  );

  assign host_rdata  = bus;
  assign mask_active = m_busy;

endmodule
