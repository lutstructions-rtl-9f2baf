// System-level workload test: the single-instruction loops and the loop
// that alternates two soft instructions, run on a one-slot unit (every
// call of the alternating loop is an implementation miss) and on the
// default two-slot unit (no misses after warm-up). Checks every result,
// the miss counts, one call per cycle for the single-instruction loops
// (N calls finish in N + 5 cycles, plus at most one miss after a switch
// of bitstream on a one-slot unit), and that the alternating loop on one
// slot costs at least the 32-cycle reconfiguration per call. Prints the
// cycles per call of every phase.
module tb_workloads;
  localparam int N = 48;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d1, d2;
  int c1, c2, f1, f2;
  int a1, b1, x1, ma1, mb1, mx1;
  int a2, b2, x2, ma2, mb2, mx2;

  workload_runner #(.SLOTS(1), .N(N)) r1 (.clk, .done(d1), .checks(c1), .failures(f1),
    .cycles_a(a1), .cycles_b(b1), .cycles_c(x1), .misses_a(ma1), .misses_b(mb1), .misses_c(mx1));
  workload_runner #(.SLOTS(2), .N(N)) r2 (.clk, .done(d2), .checks(c2), .failures(f2),
    .cycles_a(a2), .cycles_b(b2), .cycles_c(x2), .misses_a(ma2), .misses_b(mb2), .misses_c(mx2));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    @(posedge clk);
    wait (d1 && d2);
    $display("1 slot : single A %0d cyc (%0d misses), single B %0d cyc (%0d misses), alternating %0d cyc for %0d calls (%0d misses)",
             a1, ma1, b1, mb1, x1, 2 * N, mx1);
    $display("2 slots: single A %0d cyc (%0d misses), single B %0d cyc (%0d misses), alternating %0d cyc for %0d calls (%0d misses)",
             a2, ma2, b2, mb2, x2, 2 * N, mx2);
    check(ma1 <= 1 && mb1 == 1 && mx1 == 2 * N, "one-slot miss counts");
    check(ma2 == 0 && mb2 == 0 && mx2 == 0, "two-slot miss counts");
    check(a2 == N + 5 && b2 == N + 5 && x2 == 2 * N + 5, "two-slot: one call per cycle, latency 5");
    check(x1 >= 2 * N * 32, "one-slot alternating loop pays the reconfiguration on every call");
    $display("TB_RESULT checks=%0d failures=%0d", checks + c1 + c2, failures + f1 + f2);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + c1 + c2, failures + f1 + f2 + 1);
    $finish;
  end
endmodule
