// qap_pkg -- shared types and constants of the exact-divisor processor.
//
// The processor keeps one register of "lines" (single bits) per candidate
// divisor and broadcasts one gate per clock to all registers. This package
// defines the gate word that is broadcast (gate_t), the placement of the
// buses on the lines of a register (the *_base functions), and the length in
// gates of every part of the program, so that generators, controller and
// testbenches agree on them.
//
// Line map of one register for an n-bit dividend, m = n/2, k = m+1:
//   X  m lines   divisor x (LSB first)
//   S  k lines   2s complement of the divisor, top line is its sign (1)
//   A  k lines   adder addend
//   B  k lines   partial dividend / remainder (adder sum bus)
//   C  k lines   adder carries c1..ck, ck is the carry-out
//   Y  n-2 lines dividend bits y[0]..y[n-3]
//   T  m-1 lines zero-test tree, the last one is the Flag
// In total 4n+1 lines. The bus widths follow the line counts of the paper's
// size analysis; keeping the sign line of S is this design's choice.
package qap_pkg;

  // Line addresses are 8 bits wide: dividends of up to 62 bits.
  localparam int unsigned LINE_W = 8;
  localparam int unsigned STEP_W = 16;

  typedef logic [LINE_W-1:0] line_t;
  typedef logic [STEP_W-1:0] step_t;

  // Gate set. NOT/CNOT/TOF are the reversible gates of the wiring diagrams;
  // RST and CRST are the irreversible operations: RST zeroes the target,
  // CRST zeroes the target only when control c1 is 1.
  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,
    OP_NOT  = 3'd1,
    OP_CNOT = 3'd2,
    OP_TOF  = 3'd3,
    OP_RST  = 3'd4,
    OP_CRST = 3'd5
  } gate_op_e;

  typedef struct packed {
    gate_op_e op;
    line_t    t;   // target line
    line_t    c1;  // first control
    line_t    c2;  // second control (Toffoli only)
  } gate_t;

  // Program phases of the controller.
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_TWOS = 2'd1,
    PH_CSA  = 2'd2,
    PH_ZERO = 2'd3
  } phase_e;

  function automatic gate_t mk_gate(gate_op_e op, int unsigned t,
                                    int unsigned c1 = 0, int unsigned c2 = 0);
    gate_t g;
    g.op = op;
    g.t  = line_t'(t);
    g.c1 = line_t'(c1);
    g.c2 = line_t'(c2);
    return g;
  endfunction

  localparam gate_t GATE_NOP = '{op: OP_NOP, t: '0, c1: '0, c2: '0};

  // ---- line map -----------------------------------------------------------
  function automatic int unsigned half(int unsigned n);  return n / 2;       endfunction
  localparam int unsigned X_BASE = 0;  // the divisor lines come first
  function automatic int unsigned s_base(int unsigned n); return n/2;        endfunction
  function automatic int unsigned a_base(int unsigned n); return n/2 + (n/2+1);     endfunction
  function automatic int unsigned b_base(int unsigned n); return n/2 + 2*(n/2+1);   endfunction
  function automatic int unsigned c_base(int unsigned n); return n/2 + 3*(n/2+1);   endfunction
  function automatic int unsigned y_base(int unsigned n); return n/2 + 4*(n/2+1);   endfunction
  function automatic int unsigned t_base(int unsigned n); return n/2 + 4*(n/2+1) + n - 2; endfunction
  function automatic int unsigned num_lines(int unsigned n); return t_base(n) + n/2 - 1; endfunction
  function automatic int unsigned flag_line(int unsigned n); return num_lines(n) - 1;  endfunction

  // ---- program lengths (gates) ---------------------------------------------
  function automatic int unsigned adder_len(int unsigned k); return 8*k - 5; endfunction
  function automatic int unsigned twos_len(int unsigned n);
    return 3*(n/2) + adder_len(n/2+1);
  endfunction
  function automatic int unsigned csa_len(int unsigned n, bit last);
    return 2*adder_len(n/2+1) + 6*(n/2) + 7 - (last ? 2*(n/2) + 2 : 0);
  endfunction
  function automatic int unsigned zero_len(int unsigned n); return 2*(n/2) - 1; endfunction
  function automatic int unsigned total_ops(int unsigned n);
    return twos_len(n) + (n-2)*csa_len(n, 1'b0) + csa_len(n, 1'b1) + zero_len(n);
  endfunction

endpackage
