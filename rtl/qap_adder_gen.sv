// qap_adder_gen -- gate sequence of the reversible k-bit adder.
//
// Combinational generator: for step = 0 .. 8k-6 it returns the gate that the
// registers apply at that step of the adder. Run in order, the gates leave
// the A bus unchanged, replace the B bus by A+B mod 2^k and XOR the carry-out
// onto the top carry line ck; carry lines c1..c(k-1) start and end at 0.
// There is no carry-in, so all three buses have k lines.
//
// The paper only states the adder's function and points to a published
// reversible ripple adder; the gate list is that adder's CARRY / SUM scheme
// (CARRY = Toffoli(a,b->c+), CNOT(a->b), Toffoli(c,b->c+); SUM = CNOT(a->b),
// CNOT(c->b)), with every gate on the absent carry-in c0 left out:
//   forward  : CARRY for bit 0..k-1           (2 + 3(k-1) gates)
//   top bit  : CNOT(a->b), SUM                (3 gates)
//   backward : CARRY^-1, SUM for bit k-2..0   (5(k-2) + 3 gates)
// 8k-5 gates in all; a step past the end returns a NOP.
//
// Interface: a_first/b_first/c_first are the first line of each bus (bus lines
// are consecutive); c_first is line c1. Purely combinational, no clock.
module qap_adder_gen
  import qap_pkg::*;
#(
  parameter int unsigned K = 17  // bus width, n/2+1 for the n = 32 default
) (
  input  step_t step,
  input  line_t a_first,
  input  line_t b_first,
  input  line_t c_first,
  output gate_t gate
);

  localparam int unsigned FWD  = 3*K - 1;          // forward carry chain
  localparam int unsigned MID  = FWD + 3;          // end of top-bit part
  localparam int unsigned BWD  = MID + 5*(K - 2);  // end of bits k-2..1
  localparam int unsigned LEN  = 8*K - 5;

  initial begin
    assert (K >= 2) else $error("qap_adder_gen: K must be at least 2");
  end

  // Line of bit i of a bus; carry line c_i (i >= 1).
  function automatic int unsigned la(int unsigned i); return int'(a_first) + i; endfunction
  function automatic int unsigned lb(int unsigned i); return int'(b_first) + i; endfunction
  function automatic int unsigned lc(int unsigned i); return int'(c_first) + i - 1; endfunction

  always_comb begin
    int unsigned s, i, r;
    s = int'(step);
    gate = GATE_NOP;
    if (s < 2) begin
      // CARRY for bit 0 without carry-in
      if (s == 0) gate = mk_gate(OP_TOF, lc(1), la(0), lb(0));
      else        gate = mk_gate(OP_CNOT, lb(0), la(0));
    end else if (s < FWD) begin
      i = (s - 2) / 3 + 1;
      r = (s - 2) % 3;
      case (r)
        0:       gate = mk_gate(OP_TOF,  lc(i+1), la(i), lb(i));
        1:       gate = mk_gate(OP_CNOT, lb(i),   la(i));
        default: gate = mk_gate(OP_TOF,  lc(i+1), lc(i), lb(i));
      endcase
    end else if (s < MID) begin
      i = K - 1;
      if (s - FWD < 2) gate = mk_gate(OP_CNOT, lb(i), la(i));
      else             gate = mk_gate(OP_CNOT, lb(i), lc(i));
    end else if (s < BWD) begin
      i = K - 2 - (s - MID) / 5;
      r = (s - MID) % 5;
      case (r)
        0:       gate = mk_gate(OP_TOF,  lc(i+1), lc(i), lb(i));
        1:       gate = mk_gate(OP_CNOT, lb(i),   la(i));
        2:       gate = mk_gate(OP_TOF,  lc(i+1), la(i), lb(i));
        3:       gate = mk_gate(OP_CNOT, lb(i),   la(i));
        default: gate = mk_gate(OP_CNOT, lb(i),   lc(i));
      endcase
    end else if (s < LEN) begin
      // CARRY^-1 and SUM for bit 0 without carry-in
      if (s - BWD == 1) gate = mk_gate(OP_TOF,  lc(1), la(0), lb(0));
      else              gate = mk_gate(OP_CNOT, lb(0), la(0));
    end
  end

endmodule
