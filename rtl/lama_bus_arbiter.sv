// lama_bus_arbiter: arbiter of the bank-internal global I/O bus, with the bus gating towards
// the logic die.
//
// Five sources can drive the 16-byte bus: the global sense amplifiers (ICA read data), the
// mask logic output, a temporary-buffer line, the column-counter latches (updated occurrence
// counts) and write data arriving from the logic die. Read data and mask output come out of
// fixed-latency pipelines and cannot wait, so the grant is by fixed priority in the order
// listed; a lower request that loses is reported on stall and must be held by its requester.
//
// Bus gating: internal reads, LUT retrievals into the temporary buffer and counting steps must
// not reach the external data path. The gate passes the bus to the logic die (host_valid)
// only when gate_out is set, and accepts host write data only when gate_in is set. How the
// gate and the arbiter are built is this design's choice; only their roles are published.
//
// Timing: purely combinational.
module lama_bus_arbiter
  import lama_pkg::*;
(
  input  logic [4:0] req,        // 0 GSA, 1 mask, 2 temp buffer, 3 counters, 4 host
  input  line_t      src_gsa,
  input  line_t      src_mask,
  input  line_t      src_tb,
  input  line_t      src_cnt,
  input  line_t      src_host,
  input  logic       gate_out,
  input  logic       gate_in,
  output logic [4:0] gnt,
  output line_t      bus,
  output logic       bus_valid,
  output logic       stall,
  output logic       host_valid
);

  logic [4:0] eff;

  always_comb begin
    eff = {req[4] & gate_in, req[3:0]};
    gnt = eff & (~eff + 5'd1);      // lowest set bit wins
    unique case (gnt)
      5'b00001: bus = src_gsa;
      5'b00010: bus = src_mask;
      5'b00100: bus = src_tb;
      5'b01000: bus = src_cnt;
      5'b10000: bus = src_host;
      default:  bus = '0;
    endcase
    bus_valid  = |gnt;
    stall      = |(eff & ~gnt);
    host_valid = bus_valid && gate_out && !gnt[4];
  end

  always_comb a_onehot: assert ($onehot0(gnt));

endmodule
