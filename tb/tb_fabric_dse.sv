// Design-space corners of the full-size 32x32 fabric: register placement
// S and configuration parallelism P at the extremes and in between.
// For each pair fabric_tester checks the load time 16*32/P (512, 128, 64,
// 32 cycles here) and the latency ceil(32/S) (32, 8, 2, 1 cycles), with
// random, adder and permutation bitstreams.
module tb_fabric_dse;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1, d2, d3;
  int   c0, c1, c2, c3, f0, f1, f2, f3;

  fabric_tester #(.W(32), .Y(32), .S(1),  .P(1),  .NOPS(40)) t0 (.clk, .done(d0), .checks(c0), .failures(f0));
  fabric_tester #(.W(32), .Y(32), .S(4),  .P(4),  .NOPS(40)) t1 (.clk, .done(d1), .checks(c1), .failures(f1));
  fabric_tester #(.W(32), .Y(32), .S(16), .P(8),  .NOPS(40)) t2 (.clk, .done(d2), .checks(c2), .failures(f2));
  fabric_tester #(.W(32), .Y(32), .S(32), .P(16), .NOPS(40)) t3 (.clk, .done(d3), .checks(c3), .failures(f3));

  initial begin
    @(posedge clk);
    wait (d0 && d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end
endmodule
