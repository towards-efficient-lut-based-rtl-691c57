// lama_pch: one HBM2 pseudo-channel with Lama-enabled banks (top level).
//
// A pseudo-channel has NUM_BANKS = 8 banks. Each bank gets its own Lama logic (lama_bank) and,
// standing in for the part of the logic-die memory controller that drives it, two command
// sequencers: lama_mult_seq for operand-coalesced bulk-multiplication batches and
// lama_accel_seq for the LLM accelerator mode. A per-bank multiplexer hands the bank's command
// port to whichever sequencer is busy, otherwise to the host command port (used to load LUTs,
// weights and operands with ordinary ACT/WR/PRE, to read results back and to issue any bank
// command directly). Different banks work on different batches at the same time (bank-level
// parallelism).
//
// Accelerator mode is input-stationary: one activation {S_A, int_A} and its positional index
// are broadcast to all banks by accel_start; every bank then updates the counters of its own
// acc_groups[b] groups of 16 output neurons. accel_busy stays high until all banks are done.
//
// The HBM PHY, the TSVs and the rest of the logic die are outside this design; host_* ports
// stand in for them. tFAW, tRRD and tRAS are not checked here; they are the controller's job.
module lama_pch
  import lama_pkg::*;
#(
  parameter int NUM_BANKS = 8,
  parameter int NUM_SA    = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host / logic-die command path, per bank
  input  logic  [NUM_BANKS-1:0] host_cmd_valid,
  output logic  [NUM_BANKS-1:0] host_cmd_ready,
  input  bank_cmd_t             host_cmd   [NUM_BANKS],
  input  line_t [1:0]           host_wdata [NUM_BANKS],
  output line_t                 host_rdata [NUM_BANKS],
  output logic  [NUM_BANKS-1:0] host_rvalid,
  // bulk multiplication, per bank
  input  logic  [NUM_BANKS-1:0] mult_start,
  input  mult_req_t             mult_req   [NUM_BANKS],
  output logic  [NUM_BANKS-1:0] mult_busy,
  output logic  [NUM_BANKS-1:0] mult_done,
  output logic  [15:0]          mult_cmds  [NUM_BANKS],
  output logic  [15:0]          mult_acts  [NUM_BANKS],
  // accelerator mode, activation broadcast to all banks
  input  logic                  accel_start,
  input  byte_t                 accel_act,
  input  logic [ROW_W-1:0]      accel_act_idx,
  input  logic [3:0]            accel_prec,
  input  accel_layout_t         accel_layout,
  input  logic [6:0]            acc_groups [NUM_BANKS],
  output logic                  accel_busy,
  output logic  [NUM_BANKS-1:0] accel_done,
  output logic  [15:0]          accel_cmds [NUM_BANKS],
  // observation
  output logic  [NUM_BANKS-1:0] wr_stall,
  output logic  [NUM_BANKS-1:0] mask_active
);

  logic [NUM_BANKS-1:0] acc_busy_v;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic      m_valid, a_valid, b_valid, b_ready;
    bank_cmd_t m_cmd, a_cmd, b_cmd;
    logic [15:0] a_acts;

    lama_mult_seq u_mseq (
      .clk, .rst_n, .start(mult_start[b] && !acc_busy_v[b]),
      .a(mult_req[b].a), .prec(mult_req[b].prec),
      .src_sa(mult_req[b].src_sa), .src_row(mult_req[b].src_row),
      .cmp_sa(mult_req[b].cmp_sa), .lut_row(mult_req[b].lut_row),
      .n_elems(mult_req[b].n_elems),
      .cmd_valid(m_valid), .cmd_ready(b_ready && mult_busy[b]), .cmd(m_cmd),
      .busy(mult_busy[b]), .done(mult_done[b]), .n_cmds(mult_cmds[b]), .n_acts(mult_acts[b])
    );

    lama_accel_seq u_aseq (
      .clk, .rst_n, .start(accel_start && !mult_busy[b] && acc_groups[b] != 7'd0),
      .act(accel_act), .act_idx(accel_act_idx), .prec(accel_prec), .n_groups(acc_groups[b]),
      .src_sa(accel_layout.src_sa), .w_row(accel_layout.w_row),
      .cmp_sa(accel_layout.cmp_sa), .lut_row(accel_layout.lut_row),
      .c1_sa(accel_layout.c1_sa), .c2_sa(accel_layout.c2_sa), .cnt_row(accel_layout.cnt_row),
      .cmd_valid(a_valid), .cmd_ready(b_ready && acc_busy_v[b] && !mult_busy[b]), .cmd(a_cmd),
      .busy(acc_busy_v[b]), .done(accel_done[b]), .n_cmds(accel_cmds[b]), .n_acts(a_acts)
    );

    always_comb begin
      if (mult_busy[b])       begin b_valid = m_valid; b_cmd = m_cmd; end
      else if (acc_busy_v[b]) begin b_valid = a_valid; b_cmd = a_cmd; end
      else                    begin b_valid = host_cmd_valid[b]; b_cmd = host_cmd[b]; end
      host_cmd_ready[b] = b_ready && !mult_busy[b] && !acc_busy_v[b];
    end

    lama_bank #(.NUM_SA(NUM_SA)) u_bank (
      .clk, .rst_n, .cmd_valid(b_valid), .cmd_ready(b_ready), .cmd(b_cmd),
      .host_wdata(host_wdata[b]), .host_rdata(host_rdata[b]), .host_rvalid(host_rvalid[b]),
      .wr_stall(wr_stall[b]), .mask_active(mask_active[b])
    );
  end

  assign accel_busy = |acc_busy_v;

endmodule
