// tb_qap_top_full -- one complete run of the processor at its default size.
//
// n = 32, 65536 registers of 129 lines: every divisor 2 .. 65535 of a 32-bit
// number in one pass of 11491 gates. Two runs back to back:
//   4294967295 = 3*5*17*257*65537: 15 divisors below 65536 (every product
//                of 3, 5, 17 and 257);
//   4292870399 = 65519*65521, two primes just below 2^16: 2 divisors.
// Every flag is checked against the remainder computed here, as is the run
// length.
module tb_qap_top_full;
  import qap_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n, start, busy, done;
  logic [31:0]    dividend;
  logic [65535:0] found;

  always #5 clk = !clk;

  qap_top dut (
    .clk, .rst_n, .start, .dividend, .busy, .done,
    .divisor_found(found), .rd_idx(16'd3), .rd_lines()
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [31:0] y, int expected_found);
    int cycles, n_found;
    @(negedge clk);
    dividend = y; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done && cycles < 15000) begin @(negedge clk); cycles++; end
    check(cycles == 11491 + 1, $sformatf("run took %0d cycles, expected 11491", cycles - 1));
    check(found[1:0] == 2'b00, "bits 0 and 1 not held at 0");
    n_found = 0;
    for (int d = 2; d < 65536; d++) begin
      check(found[d] == ((y % 32'(d)) == 0), $sformatf("y=%0d d=%0d found=%0d", y, d, found[d]));
      if (found[d]) n_found++;
    end
    check(n_found == expected_found, $sformatf("%0d divisors found, expected %0d", n_found, expected_found));
    $display("dividend %0d: %0d divisors found", y, n_found);
  endtask

  initial begin
    rst_n = 0; start = 0; dividend = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(32'hFFFF_FFFF, 15);
    run(32'd4292870399, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
