// qap_zero_gen -- gate sequence of the zero-remainder test.
//
// After the last CSA stage the remainder sits on the low m = n/2 B lines.
// Combinational, one gate per step, zero_len(n) = 2m-1 steps:
//   NOT B_i for i < m                          invert the remainder
//   Toffoli(item 2t, item 2t+1 -> item m+t)    for t = 0 .. m-2
// Items 0..m-1 are the inverted remainder lines, items m..2m-2 are the m-1
// tree lines T, and the last of them is the Flag. The Toffolis form a
// balanced AND tree, so Flag = 1 exactly when every remainder bit was 0.
// The tree and its line count (n/2 - 1) are the paper's; the pairing rule
// that extends its 4-bit drawing to any m is this design's.
module qap_zero_gen
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS = 32  // dividend width n (even)
) (
  input  step_t step,
  output gate_t gate
);

  localparam int unsigned M  = N_BITS / 2;
  localparam int unsigned BB = b_base(N_BITS);
  localparam int unsigned TB = t_base(N_BITS);

  function automatic int unsigned item(int unsigned idx);
    return (idx < M) ? BB + idx : TB + (idx - M);
  endfunction

  always_comb begin
    int unsigned s, t;
    s = int'(step);
    t = 0;
    gate = GATE_NOP;
    if (s < M) gate = mk_gate(OP_NOT, BB + s);
    else if (s < 2*M - 1) begin
      t = s - M;
      gate = mk_gate(OP_TOF, item(M + t), item(2*t), item(2*t + 1));
    end
  end

endmodule
