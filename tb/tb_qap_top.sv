// tb_qap_top -- end-to-end test of the divisor-finding processor.
//
// Three processors: n = 4 (the paper's worked example, 15 / 3), n = 8 (16
// registers, every dividend 0..255) and n = 12 (64 registers, random
// dividends). Each run pulses start with a dividend, waits for done and
// checks divisor_found[d] == (dividend mod d == 0) for every d >= 2, bits 0
// and 1 held at 0, the run length: total_ops(n) cycles, counted here as
// 193, 751 and 1661 from the gate counts of the parts; and, at n = 8, the
// read-out port: divisor lines = d, B lines = inverted remainder.
//
// Mechanisms counted from inside the n = 8 processor, each of which must
// occur: a CSA subtraction that is kept (carry-out 1 after the first add),
// one that is restored (carry-out 0), an irreversible reset gate, a flag
// raised (exact divisor) and one left at 0, a start ignored while busy.
module tb_qap_top;
  import qap_pkg::*;

  int checks = 0, failures = 0;
  int n_keep = 0, n_restore = 0, n_reset = 0, n_found = 0, n_notfound = 0, n_ignored = 0;

  logic clk = 0, rst_n;
  always #5 clk = !clk;

  logic        start4, start8, start12;
  logic [3:0]  y4;
  logic [7:0]  y8;
  logic [11:0] y12;
  logic busy4, done4, busy8, done8, busy12, done12;
  logic [3:0]  found4;
  logic [15:0] found8;
  logic [63:0] found12;
  logic [3:0]  rd8;
  logic [32:0] lines8;

  qap_top #(.N_BITS(4)) dut4 (
    .clk, .rst_n, .start(start4), .dividend(y4), .busy(busy4), .done(done4),
    .divisor_found(found4), .rd_idx(2'd0), .rd_lines());
  qap_top #(.N_BITS(8)) dut8 (
    .clk, .rst_n, .start(start8), .dividend(y8), .busy(busy8), .done(done8),
    .divisor_found(found8), .rd_idx(rd8), .rd_lines(lines8));
  qap_top #(.N_BITS(12)) dut12 (
    .clk, .rst_n, .start(start12), .dividend(y12), .busy(busy12), .done(done12),
    .divisor_found(found12), .rd_idx(6'd0), .rd_lines());

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Observe the n = 8 processor: carry-out right after the first adder of
  // a CSA stage (step m + 8k-5 = 4 + 35), and every reset gate.
  localparam int CO8 = 4 + 3*5 + 4;   // c_base + k - 1 for n = 8
  always @(posedge clk) begin
    if (dut8.u_ctrl.phase == PH_CSA && int'(dut8.u_ctrl.step) == 4 + 35)
      for (int r = 2; r < 16; r++) begin
        if (dut8.u_array.regs[r][CO8]) n_keep++;
        else                           n_restore++;
      end
    if (dut8.gate_valid && dut8.gate.op == OP_RST) n_reset++;
  end

  task automatic run8(int y, bit poke_start);
    int cycles;
    @(negedge clk);
    y8 = 8'(y); start8 = 1;
    @(negedge clk);
    start8 = 0; y8 = ~8'(y);  // dividend is sampled only at start
    cycles = 1;
    while (!done8 && cycles < 2000) begin
      if (poke_start && cycles == 100) begin
        start8 = 1;
        n_ignored++;
      end else start8 = 0;
      @(negedge clk);
      cycles++;
    end
    start8 = 0;
    check(cycles == 751 + 1, $sformatf("n=8 run took %0d cycles", cycles - 1));
    check(found8[1:0] == 2'b00, "divisor_found[1:0] not held at 0");
    for (int d = 2; d < 16; d++) begin
      check(found8[d] == ((y % d) == 0), $sformatf("n=8 y=%0d d=%0d found=%0d", y, d, found8[d]));
      if (found8[d]) n_found++; else n_notfound++;
      // Read-out: divisor lines hold d, B lines (14..17) the inverted remainder.
      rd8 = 4'(d); #1;
      check(lines8[3:0] == 4'(d) && lines8[17:14] == ~4'(y % d),
            $sformatf("n=8 y=%0d d=%0d read-out %h", y, d, lines8));
    end
    @(negedge clk);
    check(!busy8, "n=8 still busy after done (a start was not ignored)");
  endtask

  task automatic run4(int y);
    int cycles;
    @(negedge clk);
    y4 = 4'(y); start4 = 1;
    @(negedge clk);
    start4 = 0;
    cycles = 1;
    while (!done4 && cycles < 1000) begin @(negedge clk); cycles++; end
    check(cycles == 193 + 1, $sformatf("n=4 run took %0d cycles", cycles - 1));
    for (int d = 2; d < 4; d++)
      check(found4[d] == ((y % d) == 0), $sformatf("n=4 y=%0d d=%0d", y, d));
  endtask

  task automatic run12(int y);
    int cycles;
    @(negedge clk);
    y12 = 12'(y); start12 = 1;
    @(negedge clk);
    start12 = 0;
    cycles = 1;
    while (!done12 && cycles < 4000) begin @(negedge clk); cycles++; end
    check(cycles == 1661 + 1, $sformatf("n=12 run took %0d cycles", cycles - 1));
    for (int d = 2; d < 64; d++)
      check(found12[d] == ((y % d) == 0), $sformatf("n=12 y=%0d d=%0d", y, d));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start4 = 0; start8 = 0; start12 = 0; y4 = 0; y8 = 0; y12 = 0; rd8 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // The worked example: 1111 / 11 leaves remainder 0.
    run4(15);
    check(found4[3] == 1'b1 && found4[2] == 1'b0, "15: divisor 3 not found or 2 found");
    for (int y = 0; y < 16; y++) run4(y);
    run8(210, 1'b1);
    for (int y = 0; y < 256; y++) run8(y, 1'b0);
    run12(4095);   // 3^2 * 5 * 7 * 13
    run12(2310);   // 2*3*5*7*11
    run12(3599);   // 59 * 61
    for (int i = 0; i < 10; i++) run12(int'($urandom_range(4095)));
    $display("mechanisms: keep=%0d restore=%0d reset_gates=%0d found=%0d not_found=%0d start_ignored=%0d",
             n_keep, n_restore, n_reset, n_found, n_notfound, n_ignored);
    check(n_keep > 0, "no kept subtraction");
    check(n_restore > 0, "no restore");
    check(n_reset > 0, "no irreversible reset");
    check(n_found > 0, "no divisor found");
    check(n_notfound > 0, "no non-divisor");
    check(n_ignored > 0, "no start during a run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
