// Testbench of lut_fabric: runs fabric_tester on the default fabric
// (32x32, S=7, P=16, latency 5, 32-cycle reconfiguration) and on small
// fabrics that cover S=1 (every column registered), S=Y (a single register
// at the end), P=1 (one segment, bit swap on every odd column) and a
// non-square fabric.
module tb_lut_fabric;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1, d2, d3;
  int   c0, c1, c2, c3, f0, f1, f2, f3;

  fabric_tester #(.W(32), .Y(32), .S(7),  .P(16), .NOPS(150)) t0 (.clk, .done(d0), .checks(c0), .failures(f0));
  fabric_tester #(.W(8),  .Y(8),  .S(1),  .P(1),  .NOPS(150)) t1 (.clk, .done(d1), .checks(c1), .failures(f1));
  fabric_tester #(.W(8),  .Y(8),  .S(8),  .P(2),  .NOPS(150)) t2 (.clk, .done(d2), .checks(c2), .failures(f2));
  fabric_tester #(.W(6),  .Y(12), .S(5),  .P(2),  .NOPS(150)) t3 (.clk, .done(d3), .checks(c3), .failures(f3));

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
