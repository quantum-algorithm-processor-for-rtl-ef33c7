// qap_twos_gen -- gate sequence of the 2s-complement generator.
//
// Combinational generator, one gate per step, twos_len(n) = 3(n/2) + 8k-5
// steps with k = n/2+1. The register is preset with A = all ones, S = 1
// and carries 0. The sequence
//   1. CNOT x_i -> A_i      (A = ~x, its sign line stays 1)
//   2. adder(A, S, C)       (S = ~x + 1 = 2s complement, sign line 1)
//   3. CNOT x_i -> A_i      (A back to all ones)
//   4. NOT A_i              (A = 0..01: only the sign line is set)
// for i < n/2, leaves the 2s complement on the S lines and A in the state
// the CSA stage starts from. Order and preset values follow the paper's
// wiring diagram; the adder's gates come from qap_adder_gen.
module qap_twos_gen
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS = 32  // dividend width n (even)
) (
  input  step_t step,
  output gate_t gate
);

  localparam int unsigned M  = N_BITS / 2;
  localparam int unsigned K  = M + 1;
  localparam int unsigned AL = adder_len(K);
  localparam int unsigned XB = X_BASE;
  localparam int unsigned AB = a_base(N_BITS);

  gate_t add_gate;
  step_t add_step;

  assign add_step = step - step_t'(M);

  qap_adder_gen #(.K(K)) u_adder (
    .step  (add_step),
    .a_first(line_t'(a_base(N_BITS))),
    .b_first(line_t'(s_base(N_BITS))),
    .c_first(line_t'(c_base(N_BITS))),
    .gate  (add_gate)
  );

  always_comb begin
    int unsigned s;
    s = int'(step);
    gate = GATE_NOP;
    if (s < M)                gate = mk_gate(OP_CNOT, AB + s, XB + s);
    else if (s < M + AL)      gate = add_gate;
    else if (s < 2*M + AL)    gate = mk_gate(OP_CNOT, AB + (s - M - AL), XB + (s - M - AL));
    else if (s < 3*M + AL)    gate = mk_gate(OP_NOT,  AB + (s - 2*M - AL));
  end

endmodule
