// qap_reg_array -- the registers of the processor, one per candidate divisor.
//
// NUM_REGS registers of num_lines(n) = 4n+1 lines. All registers receive
// the same gate and apply it to their own lines in the same clock edge, so
// a program of G gates divides by every divisor at once in G cycles.
// Register r works on divisor x = r.
//
// Gate set (gate_t): NOT t; CNOT c1 -> t; Toffoli c1,c2 -> t; RST t (the
// irreversible "zero this line"); CRST c1 -> t (zero t only when c1 is 1).
// The gate decode (target mask, operation) is done once and shared; each
// register only reads its two control lines.
//
// load presets every register on the clock edge: x = r, S = 1, A = all ones,
// B = {0.., y[n-1], y[n-2]}, Y = y[n-3:0], carries and tree lines 0 -- the
// starting values printed on the paper's diagrams. load has priority over
// gate_valid. Register contents are not reset; they are defined from the
// first load on. flags[r] is the last line (Flag) of register r; rd_lines
// shows all lines of register rd_idx, combinationally.
//
// The parallel registers, the lines and the gate set -- the two resets
// included -- are the paper's. The shared decode, the preset port, the
// read-out port and the absence of a register reset are this design's.
module qap_reg_array
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS   = 32,                 // dividend width n
  parameter int unsigned NUM_REGS = 2**(N_BITS/2),      // one per n/2-bit divisor
  parameter int unsigned LINES    = num_lines(N_BITS),  // lines per register
  parameter int unsigned IDX_W    = $clog2(NUM_REGS)
) (
  input  logic                clk,
  input  logic                load,
  input  logic [N_BITS-1:0]   dividend,
  input  logic                gate_valid,
  input  gate_t               gate,
  output logic [NUM_REGS-1:0] flags,
  input  logic [IDX_W-1:0]    rd_idx,
  output logic [LINES-1:0]    rd_lines
);

  localparam int unsigned M = N_BITS / 2;
  localparam int unsigned K = M + 1;
  localparam int unsigned CW = $clog2(LINES);  // bits that address a line

  typedef logic [LINES-1:0] lines_t;

  lines_t regs [NUM_REGS];

  // Lines common to every register at load: all but the divisor.
  lines_t preset;
  always_comb begin
    preset = '0;
    preset[s_base(N_BITS)] = 1'b1;
    for (int i = 0; i < K; i++) preset[a_base(N_BITS) + i] = 1'b1;
    preset[b_base(N_BITS)]     = dividend[N_BITS-2];
    preset[b_base(N_BITS) + 1] = dividend[N_BITS-1];
    for (int i = 0; i < N_BITS - 2; i++) preset[y_base(N_BITS) + i] = dividend[i];
  end

  // Shared gate decode.
  lines_t tmask;
  logic   is_flip, is_ctl1, is_ctl2, is_clear;
  always_comb begin
    tmask    = lines_t'(1) << gate.t;
    is_flip  = gate.op inside {OP_NOT, OP_CNOT, OP_TOF};
    is_clear = gate.op inside {OP_RST, OP_CRST};
    is_ctl1  = gate.op inside {OP_CNOT, OP_TOF, OP_CRST};
    is_ctl2  = (gate.op == OP_TOF);
  end

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < NUM_REGS; r++) begin
      if (load) begin
        regs[r] <= preset | lines_t'(M'(r));
      end else if (gate_valid) begin
        // Enable = product of the controls the gate uses.
        if ((!is_ctl1 || regs[r][gate.c1[CW-1:0]]) && (!is_ctl2 || regs[r][gate.c2[CW-1:0]])) begin
          if (is_flip)  regs[r] <= regs[r] ^ tmask;
          if (is_clear) regs[r] <= regs[r] & ~tmask;
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NUM_REGS; r++) flags[r] = regs[r][LINES-1];
  end

  assign rd_lines = regs[rd_idx];

  // A live gate must address lines that exist.
  assert property (@(posedge clk) gate_valid && !load |->
                   (int'(gate.t) < LINES) && (int'(gate.c1) < LINES) && (int'(gate.c2) < LINES))
    else $error("qap_reg_array: gate addresses a line beyond %0d", LINES);

endmodule
