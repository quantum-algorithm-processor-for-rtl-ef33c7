// tb_qap_adder_gen -- self-checking test of the reversible adder sequence.
//
// Plays the gate list of qap_adder_gen on a line vector held in the
// testbench (its own gate interpreter) for k = 3, the width of the paper's
// three-bit example, exhaustively, and for k = 6 on random operands. Checks
// after the last gate: A unchanged, B = A+B mod 2^k, top carry line = carry
// out, other carry lines 0; and that the sequence is 8k-5 gates long (the
// gate at step 8k-5 is a NOP, the one before it is not).
module tb_qap_adder_gen;
  import qap_pkg::*;

  int checks = 0, failures = 0;

  step_t step3, step6;
  gate_t gate3, gate6;

  // Buses: A at line 0, B at k, carries c1..ck at 2k.
  qap_adder_gen #(.K(3)) dut3 (.step(step3), .a_first(8'd0), .b_first(8'd3), .c_first(8'd6), .gate(gate3));
  qap_adder_gen #(.K(6)) dut6 (.step(step6), .a_first(8'd0), .b_first(8'd6), .c_first(8'd12), .gate(gate6));

  function automatic logic [255:0] apply(logic [255:0] v, gate_t g);
    case (g.op)
      OP_NOT:  v[g.t] = !v[g.t];
      OP_CNOT: v[g.t] = v[g.t] ^ v[g.c1];
      OP_TOF:  v[g.t] = v[g.t] ^ (v[g.c1] & v[g.c2]);
      OP_RST:  v[g.t] = 1'b0;
      OP_CRST: if (v[g.c1]) v[g.t] = 1'b0;
      default: ;
    endcase
    return v;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic run3(int a, int b);
    logic [255:0] v;
    v = '0;
    v[2:0] = 3'(a);
    v[5:3] = 3'(b);
    for (int s = 0; s < 19; s++) begin
      step3 = step_t'(s); #1;
      v = apply(v, gate3);
    end
    check(v[2:0] == 3'(a), $sformatf("k=3 A changed a=%0d b=%0d", a, b));
    check(v[5:3] == 3'(a + b), $sformatf("k=3 sum a=%0d b=%0d got %0d", a, b, v[5:3]));
    check(v[8] == ((a + b) >= 8), $sformatf("k=3 carry a=%0d b=%0d", a, b));
    check(v[7:6] == 2'b00, $sformatf("k=3 carries not cleared a=%0d b=%0d", a, b));
  endtask

  task automatic run6(int a, int b);
    logic [255:0] v;
    v = '0;
    v[5:0]  = 6'(a);
    v[11:6] = 6'(b);
    for (int s = 0; s < 43; s++) begin
      step6 = step_t'(s); #1;
      v = apply(v, gate6);
    end
    check(v[5:0] == 6'(a), "k=6 A changed");
    check(v[11:6] == 6'(a + b), $sformatf("k=6 sum a=%0d b=%0d got %0d", a, b, v[11:6]));
    check(v[17] == ((a + b) >= 64), "k=6 carry");
    check(v[16:12] == 5'b0, "k=6 carries not cleared");
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Length: 8k-5 gates.
    step3 = 18; #1; check(gate3.op != OP_NOP, "k=3 step 18 should be a gate");
    step3 = 19; #1; check(gate3.op == OP_NOP, "k=3 step 19 should be past the end");
    step6 = 42; #1; check(gate6.op != OP_NOP, "k=6 step 42 should be a gate");
    step6 = 43; #1; check(gate6.op == OP_NOP, "k=6 step 43 should be past the end");
    for (int a = 0; a < 8; a++)
      for (int b = 0; b < 8; b++) run3(a, b);
    for (int i = 0; i < 300; i++) run6(int'($urandom_range(63)), int'($urandom_range(63)));
    run6(63, 63);
    run6(63, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
