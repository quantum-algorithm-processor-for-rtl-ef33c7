// tb_qap_twos_gen -- self-checking test of the 2s-complement generator.
//
// Presets a register (its lines held in the testbench) the way the
// processor does -- x = divisor, S = 1, A = all ones, everything else 0 --
// then plays the generator's gates with the testbench's own gate
// interpreter. Checked for every divisor at n = 4 (the paper's 2-bit
// example, x = 3 gives 2s complement 101) and n = 8: S = 2^k - x,
// A = 0..01, carries 0, x unchanged. Also checks the length,
// 3(n/2) + 8k - 5 gates.
module tb_qap_twos_gen;
  import qap_pkg::*;

  int checks = 0, failures = 0;

  step_t step4, step8;
  gate_t gate4, gate8;

  qap_twos_gen #(.N_BITS(4)) dut4 (.step(step4), .gate(gate4));
  qap_twos_gen #(.N_BITS(8)) dut8 (.step(step8), .gate(gate8));

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

  // Field of width w starting at line b.
  function automatic int field(logic [255:0] v, int b, int w);
    return int'((v >> b) & ((256'd1 << w) - 1));
  endfunction

  task automatic run(int n, int x);
    int m, k, len;
    logic [255:0] v;
    m = n / 2; k = m + 1;
    len = 3*m + 8*k - 5;
    v = '0;
    v |= 256'(x);                       // X at line 0
    v[m] = 1'b1;                       // S = 1
    v |= ((256'd1 << k) - 1) << (m + k); // A = all ones
    for (int s = 0; s <= len; s++) begin
      gate_t g;
      if (n == 4) begin step4 = step_t'(s); #1; g = gate4; end
      else        begin step8 = step_t'(s); #1; g = gate8; end
      if (s == len) check(g.op == OP_NOP, $sformatf("n=%0d step %0d past the end is not NOP", n, s));
      else if (s == len - 1) check(g.op != OP_NOP, "last step should hold a gate");
      v = apply(v, g);
    end
    check(field(v, 0, m) == x, $sformatf("n=%0d x=%0d divisor changed", n, x));
    check(field(v, m, k) == ((1 << k) - x), $sformatf("n=%0d x=%0d 2s complement %0d", n, x, field(v, m, k)));
    check(field(v, m + k, k) == (1 << m), $sformatf("n=%0d x=%0d A lines not 0..01", n, x));
    check(field(v, m + 3*k, k) == 0, $sformatf("n=%0d x=%0d carries not 0", n, x));
    check(field(v, m + 2*k, k) == 0, $sformatf("n=%0d x=%0d B lines touched", n, x));
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 1; x < 4; x++)  run(4, x);
    for (int x = 1; x < 16; x++) run(8, x);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
