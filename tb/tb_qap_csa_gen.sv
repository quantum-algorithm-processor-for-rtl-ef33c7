// tb_qap_csa_gen -- self-checking test of one conditional subtract-add stage.
//
// n = 8 (m = 4 divisor bits, k = 5). A register (held in the testbench) is
// set up as the stage finds it: x, its 2s complement on S, A = 0..01,
// partial dividend P < 2x on B, random dividend bits on Y. After playing
// the stage's gates with the testbench's own interpreter:
//   r = P mod x  (P - x when P >= x, else P, the restored value)
//   middle stage: B = 2r + y[n-3-stage]; last stage: B = r
//   A = 0..01, carries 0, x, S and Y unchanged.
// Stage lengths are checked (2(8k-5) + 6m + 7, and 2m + 2 less for the
// last stage), and both outcomes of the subtraction -- no restore and
// restore -- are counted and must each occur.
module tb_qap_csa_gen;
  import qap_pkg::*;

  localparam int N = 8, M = 4, K = 5;
  localparam int XB = 0, SB = M, AB = M + K, BB = M + 2*K, CB = M + 3*K, YB = M + 4*K;
  localparam int FULL = 2*(8*K - 5) + 6*M + 7;
  localparam int LAST = FULL - 2*M - 2;

  int checks = 0, failures = 0, n_restore = 0, n_keep = 0;

  step_t      step;
  logic [7:0] stage;
  gate_t      gate;

  qap_csa_gen #(.N_BITS(N)) dut (.step(step), .stage(stage), .gate(gate));

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

  function automatic int field(logic [255:0] v, int b, int w);
    return int'((v >> b) & ((256'd1 << w) - 1));
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic run(int x, int p, int st, int y);
    logic [255:0] v, v0;
    int len, r, exp_b;
    bit last;
    last = (st == N - 2);
    len  = last ? LAST : FULL;
    v = '0;
    v |= 256'(x) << XB;
    v |= 256'((1 << K) - x) << SB;
    v |= 256'(1 << M) << AB;
    v |= 256'(p) << BB;
    v |= 256'(y) << YB;
    v0 = v;
    stage = 8'(st);
    for (int s = 0; s <= len; s++) begin
      step = step_t'(s); #1;
      if (s == len) check(gate.op == OP_NOP, $sformatf("stage %0d: gate past the end", st));
      v = apply(v, gate);
    end
    if (p >= x) begin r = p - x; n_keep++; end
    else        begin r = p;     n_restore++; end
    exp_b = last ? r : ((2*r + ((y >> (N - 3 - st)) & 1)) & ((1 << K) - 1));
    check(field(v, BB, K) == exp_b,
          $sformatf("x=%0d P=%0d stage=%0d: B=%0d expected %0d", x, p, st, field(v, BB, K), exp_b));
    check(field(v, AB, K) == (1 << M), "A not back to 0..01");
    check(field(v, CB, K) == 0, "carries not 0");
    check(field(v, XB, M) == x && field(v, SB, K) == field(v0, SB, K) && field(v, YB, N - 2) == y,
          "x, S or Y changed");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Every x, every P < 2x, stages 0, 3 and 6 (the last), random dividend bits.
    for (int x = 2; x < 16; x++)
      for (int p = 0; p < 2*x; p++)
        for (int st = 0; st <= N - 2; st += 3)
          run(x, p, st, int'($urandom_range(63)));
    for (int x = 2; x < 16; x++) run(x, x - 1, N - 2, 0);
    check(n_restore > 0, "restore never happened");
    check(n_keep > 0, "subtraction never kept");
    $display("restore=%0d keep=%0d", n_restore, n_keep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
