// qap_csa_gen -- gate sequence of one conditional subtract-add (CSA) stage.
//
// One restoring-division step on the partial dividend P held on the B lines
// (k = n/2+1 lines, P < 2x). Combinational, one gate per step:
//   CNOT 2s_i -> A_i           A = 2s complement of x (sign line already 1)
//   adder(A, B, C)             B = P - x mod 2^k, carry-out co = (P >= x)
//   CNOT 2s_i -> A_i, NOT A_m  (alpha) A = 0
//   NOT co                     co = 1 when the result was negative
//   Toffoli(x_i, co -> A_i)    A = x if negative, else 0
//   RST co                     (beta2) irreversible reset of the carry
//   adder(A, B, C)             restore: B = P when negative, else P - x
//   Toffoli(x_i, co -> A_i), NOT A_m   A back to 0..01
//   RST co                     (beta4)
//   RST B_m                    (gamma) remainder < x, its top line is 0
//   CNOT B_i -> B_i+1, CNOT B_i+1 -> B_i for i = m-1..0   shift B up a line
//   CNOT y -> B_0              bring down the next dividend bit
// with i < m = n/2. The gate order is the paper's irreversible stage; the
// last stage (stage = n-2) stops after beta4 so that the remainder stays on
// the B lines for the zero test -- a choice of this design. Length is
// csa_len(n, last): 2(8k-5) + 6m + 7 gates, 2m + 2 fewer for the last stage.
//
// stage selects the dividend line brought down: stage j brings y[n-3-j],
// so the dividend enters most significant bit first.
module qap_csa_gen
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS = 32  // dividend width n (even)
) (
  input  step_t      step,
  input  logic [7:0] stage,
  output gate_t      gate
);

  localparam int unsigned M  = N_BITS / 2;
  localparam int unsigned K  = M + 1;
  localparam int unsigned AL = adder_len(K);
  localparam int unsigned XB = X_BASE;
  localparam int unsigned SB = s_base(N_BITS);
  localparam int unsigned AB = a_base(N_BITS);
  localparam int unsigned BB = b_base(N_BITS);
  localparam int unsigned YB = y_base(N_BITS);
  localparam int unsigned CO = c_base(N_BITS) + K - 1;  // carry-out line

  // Start step of each part of the stage.
  localparam int unsigned P_ADD1  = M;
  localparam int unsigned P_ALPHA = M + AL;
  localparam int unsigned P_ANOT1 = 2*M + AL;
  localparam int unsigned P_CNOT  = 2*M + AL + 1;
  localparam int unsigned P_TOF1  = 2*M + AL + 2;
  localparam int unsigned P_RST2  = 3*M + AL + 2;
  localparam int unsigned P_ADD2  = 3*M + AL + 3;
  localparam int unsigned P_TOF2  = 3*M + 2*AL + 3;
  localparam int unsigned P_ANOT2 = 4*M + 2*AL + 3;
  localparam int unsigned P_RST4  = 4*M + 2*AL + 4;
  localparam int unsigned P_GAMMA = 4*M + 2*AL + 5;
  localparam int unsigned P_SHIFT = 4*M + 2*AL + 6;
  localparam int unsigned P_BRING = 6*M + 2*AL + 6;

  gate_t add_gate;
  step_t add_step;
  logic  last;

  assign last     = (int'(stage) >= N_BITS - 2);
  assign add_step = (int'(step) < P_ADD2) ? step - step_t'(P_ADD1) : step - step_t'(P_ADD2);

  qap_adder_gen #(.K(K)) u_adder (
    .step  (add_step),
    .a_first(line_t'(AB)),
    .b_first(line_t'(BB)),
    .c_first(line_t'(c_base(N_BITS))),
    .gate  (add_gate)
  );

  always_comb begin
    int unsigned s, i;
    s = int'(step);
    i = 0;
    gate = GATE_NOP;
    if (s < P_ADD1)            gate = mk_gate(OP_CNOT, AB + s, SB + s);
    else if (s < P_ALPHA)      gate = add_gate;
    else if (s < P_ANOT1)      gate = mk_gate(OP_CNOT, AB + (s - P_ALPHA), SB + (s - P_ALPHA));
    else if (s == P_ANOT1)     gate = mk_gate(OP_NOT, AB + M);
    else if (s == P_CNOT)      gate = mk_gate(OP_NOT, CO);
    else if (s < P_RST2)       gate = mk_gate(OP_TOF, AB + (s - P_TOF1), XB + (s - P_TOF1), CO);
    else if (s == P_RST2)      gate = mk_gate(OP_RST, CO);
    else if (s < P_TOF2)       gate = add_gate;
    else if (s < P_ANOT2)      gate = mk_gate(OP_TOF, AB + (s - P_TOF2), XB + (s - P_TOF2), CO);
    else if (s == P_ANOT2)     gate = mk_gate(OP_NOT, AB + M);
    else if (s == P_RST4)      gate = mk_gate(OP_RST, CO);
    else if (!last) begin
      if (s == P_GAMMA)        gate = mk_gate(OP_RST, BB + M);
      else if (s < P_BRING) begin
        i = M - 1 - (s - P_SHIFT) / 2;
        if (((s - P_SHIFT) % 2) == 0) gate = mk_gate(OP_CNOT, BB + i + 1, BB + i);
        else                          gate = mk_gate(OP_CNOT, BB + i, BB + i + 1);
      end else if (s == P_BRING)
        gate = mk_gate(OP_CNOT, BB, YB + (N_BITS - 3 - int'(stage)));
    end
  end

endmodule
