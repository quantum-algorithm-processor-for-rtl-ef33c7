// tb_qap_zero_gen -- self-checking test of the zero-remainder test.
//
// Puts a remainder on the low n/2 B lines of a register held in the
// testbench, plays the gates (own interpreter) and checks that the Flag
// line is 1 exactly when the remainder is 0, and that the sequence is
// 2(n/2) - 1 gates long. n = 8 gives the paper's 4-line tree; n = 10
// gives a 5-line tree with an unpaired leaf. All remainders are tried.
module tb_qap_zero_gen;
  import qap_pkg::*;

  int checks = 0, failures = 0, n_zero = 0;

  step_t step8, step10;
  gate_t gate8, gate10;

  qap_zero_gen #(.N_BITS(8))  dut8  (.step(step8),  .gate(gate8));
  qap_zero_gen #(.N_BITS(10)) dut10 (.step(step10), .gate(gate10));

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

  task automatic run(int n, int rem);
    logic [255:0] v;
    int m, k, bb, flag, len;
    m = n / 2; k = m + 1;
    bb = m + 2*k;
    flag = 4*n;           // last of the 4n+1 lines
    len = 2*m - 1;
    v = '0;
    v |= 256'(rem) << bb;
    for (int s = 0; s <= len; s++) begin
      gate_t g;
      if (n == 8) begin step8 = step_t'(s); #1; g = gate8; end
      else        begin step10 = step_t'(s); #1; g = gate10; end
      if (s == len) check(g.op == OP_NOP, "gate past the end");
      v = apply(v, g);
    end
    check(v[flag] == (rem == 0), $sformatf("n=%0d rem=%0d flag=%0d", n, rem, v[flag]));
    if (rem == 0) n_zero++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) run(8, r);
    for (int r = 0; r < 32; r++) run(10, r);
    check(n_zero == 2, "zero remainder not tried");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
