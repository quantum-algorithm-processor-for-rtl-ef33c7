// qap_top -- processor that flags every exact divisor of an n-bit number.
//
// One register per candidate divisor 0 .. 2^(n/2)-1 (qap_reg_array) and
// one sequencer (qap_controller) that broadcasts the restoring-division
// wiring diagram to all of them, one gate per clock. Pulse start for one
// cycle with the dividend on its port; the dividend is sampled on that
// edge. done pulses total_ops(n) cycles later (11491 for n = 32); from then
// on divisor_found[d] = 1 exactly when d divides the dividend, for every
// d >= 2 (bits 0 and 1 are held at 0: the method divides by 2 .. sqrt N).
// divisor_found holds until the next start. rd_idx / rd_lines read out all
// lines of one register, for inspection.
//
// Following the paper: one register per candidate divisor, 2^(n/2) of them,
// the restoring-division wiring diagram with irreversible resets, and the
// default n = 32 (65536 registers). This design's own: the handshake, the
// one-gate-per-clock timing, the read-out port and the masking of bits 0/1.
module qap_top
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS   = 32,             // dividend width n (even, 4..62)
  parameter int unsigned NUM_REGS = 2**(N_BITS/2),  // registers = candidate divisors
  parameter int unsigned IDX_W    = $clog2(NUM_REGS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [N_BITS-1:0]         dividend,
  output logic                      busy,
  output logic                      done,
  output logic [NUM_REGS-1:0]       divisor_found,
  input  logic [IDX_W-1:0]          rd_idx,
  output logic [num_lines(N_BITS)-1:0] rd_lines
);

  logic       load, gate_valid;
  gate_t      gate;
  logic [NUM_REGS-1:0] flags;

  qap_controller #(.N_BITS(N_BITS)) u_ctrl (
    .clk, .rst_n, .start, .load, .busy, .done,
    .gate_valid, .gate, .phase(), .stage(), .step()
  );

  qap_reg_array #(.N_BITS(N_BITS), .NUM_REGS(NUM_REGS)) u_array (
    .clk, .load, .dividend, .gate_valid, .gate,
    .flags, .rd_idx, .rd_lines
  );

  always_comb begin
    divisor_found = flags;
    divisor_found[0] = 1'b0;
    divisor_found[1] = 1'b0;
  end

endmodule
