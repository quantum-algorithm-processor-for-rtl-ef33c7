// tb_qap_reg_array -- self-checking test of the register array.
//
// n = 4 (17 lines per register), 4 registers. Loads a dividend and checks
// every register's preset lines through the read-out port (x = register
// index, S = 1, A = all ones, B = two dividend MSBs, Y = the rest). Then
// broadcasts 3000 random gates of every kind, including the two
// irreversible ones, and compares all registers after each gate with a
// model kept in the testbench; the Flag outputs are compared too. A gate
// with gate_valid low must change nothing, and load must win over a gate.
module tb_qap_reg_array;
  import qap_pkg::*;

  localparam int N = 4, R = 4, L = 4*N + 1;

  int checks = 0, failures = 0;
  int seen [6];

  logic           clk = 0;
  logic           load, gate_valid;
  logic [N-1:0]   dividend;
  gate_t          gate;
  logic [R-1:0]   flags;
  logic [1:0]     rd_idx;
  logic [L-1:0]   rd_lines;
  logic [L-1:0]   model [R];

  qap_reg_array #(.N_BITS(N), .NUM_REGS(R)) dut (
    .clk, .load, .dividend, .gate_valid, .gate, .flags, .rd_idx, .rd_lines
  );

  always #5 clk = !clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [L-1:0] apply(logic [L-1:0] v_in, gate_t g);
    logic [255:0] v;
    v = 256'(v_in);
    case (g.op)
      OP_NOT:  v[g.t] = !v[g.t];
      OP_CNOT: v[g.t] = v[g.t] ^ v[g.c1];
      OP_TOF:  v[g.t] = v[g.t] ^ (v[g.c1] & v[g.c2]);
      OP_RST:  v[g.t] = 1'b0;
      OP_CRST: if (v[g.c1]) v[g.t] = 1'b0;
      default: ;
    endcase
    return v[L-1:0];
  endfunction

  task automatic compare_all(string when);
    for (int r = 0; r < R; r++) begin
      rd_idx = 2'(r); #1;
      check(rd_lines == model[r], $sformatf("%s: reg %0d = %h expected %h", when, r, rd_lines, model[r]));
      check(flags[r] == model[r][L-1], $sformatf("%s: flag %0d", when, r));
    end
  endtask

  // Preset as the paper's diagrams start: lines x0,x1 | S0..S2 | A0..A2 |
  // B0..B2 | C1..C3 | y0,y1 | T0 (= Flag).
  function automatic logic [L-1:0] preset(int r, logic [N-1:0] y);
    logic [L-1:0] v;
    v = '0;
    v[1:0]  = 2'(r);
    v[2]    = 1'b1;          // S = 001
    v[7:5]  = 3'b111;        // A = 111
    v[8]    = y[2];
    v[9]    = y[3];
    v[15:14] = y[1:0];
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; gate_valid = 0; gate = GATE_NOP; dividend = 4'b1101; rd_idx = 0;
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int r = 0; r < R; r++) model[r] = preset(r, 4'b1101);
    compare_all("after load");
    for (int i = 0; i < 3000; i++) begin
      gate.op = gate_op_e'($urandom_range(5));
      gate.t  = line_t'($urandom_range(L - 1));
      gate.c1 = line_t'($urandom_range(L - 1));
      gate.c2 = line_t'($urandom_range(L - 1));
      gate_valid = ($urandom_range(9) != 0);
      @(negedge clk);
      if (gate_valid) begin
        seen[int'(gate.op)]++;
        for (int r = 0; r < R; r++) model[r] = apply(model[r], gate);
      end
      compare_all($sformatf("gate %0d op %0d", i, gate.op));
    end
    // load has priority over a live gate
    gate = mk_gate(OP_NOT, 0);
    gate_valid = 1; load = 1; dividend = 4'b0110;
    @(negedge clk);
    load = 0; gate_valid = 0;
    for (int r = 0; r < R; r++) model[r] = preset(r, 4'b0110);
    compare_all("load over gate");
    for (int o = 1; o < 6; o++) check(seen[o] > 0, $sformatf("op %0d never applied", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
