// tb_qap_controller -- self-checking test of the program sequencer.
//
// n = 4 and n = 6 controllers. For each, the testbench records the gate
// stream of one run and plays it on its own register model for every
// divisor x = 2 .. 2^(n/2)-1 and every dividend; the Flag it ends with must
// equal (dividend mod x == 0). Also checked: load only with start in idle,
// busy for exactly total_ops(n) cycles (193 for n = 4 and 428 for n = 6,
// counted independently of the package), gate_valid equal to busy, done a
// single-cycle pulse after the last gate, start ignored while busy.
module tb_qap_controller;
  import qap_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n;
  logic start4, start6;
  logic load4, busy4, done4, gv4, load6, busy6, done6, gv6;
  gate_t gate4, gate6;

  qap_controller #(.N_BITS(4)) dut4 (
    .clk, .rst_n, .start(start4), .load(load4), .busy(busy4), .done(done4),
    .gate_valid(gv4), .gate(gate4), .phase(), .stage(), .step()
  );
  qap_controller #(.N_BITS(6)) dut6 (
    .clk, .rst_n, .start(start6), .load(load6), .busy(busy6), .done(done6),
    .gate_valid(gv6), .gate(gate6), .phase(), .stage(), .step()
  );

  always #5 clk = !clk;

  gate_t prog [$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

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

  // Register preset for dividend y, divisor x (line map of the design).
  function automatic logic [255:0] preset(int n, int x, int y);
    int m, k;
    logic [255:0] v;
    m = n / 2; k = m + 1;
    v = 256'(x);
    v[m] = 1'b1;
    v |= ((256'd1 << k) - 1) << (m + k);
    v[m + 2*k]     = y[n-2];
    v[m + 2*k + 1] = y[n-1];
    v |= (256'(y) & ((256'd1 << (n - 2)) - 1)) << (m + 4*k);
    return v;
  endfunction

  task automatic run(int n, int expected_len);
    int cycles, done_cnt;
    prog.delete();
    @(negedge clk);
    if (n == 4) start4 = 1; else start6 = 1;
    #1;
    check((n == 4 ? load4 : load6) == 1, "load not raised with start");
    @(negedge clk);
    if (n == 4) start4 = 0; else start6 = 0;
    cycles = 0; done_cnt = 0;
    while ((n == 4 ? busy4 : busy6) && cycles < 5000) begin
      check((n == 4 ? gv4 : gv6) == 1, "gate_valid low while busy");
      check((n == 4 ? load4 : load6) == 0, "load while busy");
      prog.push_back(n == 4 ? gate4 : gate6);
      // start during a run must be ignored
      if (cycles == 10) begin if (n == 4) start4 = 1; else start6 = 1; end
      if (cycles == 11) begin if (n == 4) start4 = 0; else start6 = 0; end
      @(negedge clk);
      cycles++;
      if (n == 4 ? done4 : done6) done_cnt++;
    end
    check(cycles == expected_len, $sformatf("n=%0d busy %0d cycles, expected %0d", n, cycles, expected_len));
    check(done_cnt == 1 && (n == 4 ? done4 : done6), "done not raised right after the last gate");
    @(negedge clk);
    check((n == 4 ? done4 : done6) == 0, "done longer than one cycle");
    check((n == 4 ? busy4 : busy6) == 0, "busy after done");
    // Play the recorded program on every divisor and dividend.
    for (int y = 0; y < (1 << n); y++)
      for (int x = 2; x < (1 << (n/2)); x++) begin
        logic [255:0] v;
        v = preset(n, x, y);
        foreach (prog[i]) v = apply(v, prog[i]);
        check(v[4*n] == ((y % x) == 0), $sformatf("n=%0d y=%0d x=%0d flag %0d", n, y, x, v[4*n]));
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start4 = 0; start6 = 0; rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!busy4 && !busy6 && !gv4 && !done4, "not idle after reset");
    run(4, 193);
    run(6, 428);
    run(4, 193);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
