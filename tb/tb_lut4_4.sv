// Testbench of lut4_4: checks the identity (bypass) table after a clear,
// programs random tables one entry per cycle through the logic inputs and
// reads every entry back, and checks that cfg_clear wins over cfg_we.
module tb_lut4_4;
  logic       clk = 1'b0;
  logic       cfg_clear, cfg_we;
  logic [3:0] cfg_entry, in, out;
  int         checks = 0, failures = 0;
  logic [3:0] exp_tbl [16];

  always #5 clk = ~clk;

  lut4_4 dut (.clk, .cfg_clear, .cfg_we, .cfg_entry, .in, .out);

  task automatic check(logic [3:0] got, logic [3:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic read_all(string what);
    for (int e = 0; e < 16; e++) begin
      in = 4'(e);
      #1 check(out, exp_tbl[e], what);
    end
  endtask

  initial begin
    cfg_clear = 1'b0; cfg_we = 1'b0; cfg_entry = '0; in = '0;
    @(negedge clk);
    cfg_clear = 1'b1;
    @(negedge clk);
    cfg_clear = 1'b0;
    for (int e = 0; e < 16; e++) exp_tbl[e] = 4'(e);
    read_all("identity");

    for (int rep = 0; rep < 20; rep++) begin
      for (int e = 0; e < 16; e++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_entry = 4'(e); in = 4'($urandom);
        exp_tbl[e] = in;
      end
      @(negedge clk);
      cfg_we = 1'b0;
      read_all("programmed");
      // A write to one entry only changes that entry.
      @(negedge clk);
      cfg_we = 1'b1; cfg_entry = 4'($urandom); in = 4'($urandom);
      exp_tbl[cfg_entry] = in;
      @(negedge clk);
      cfg_we = 1'b0;
      read_all("single write");
    end

    // Clear has priority over a write in the same cycle.
    @(negedge clk);
    cfg_clear = 1'b1; cfg_we = 1'b1; cfg_entry = 4'd5; in = 4'd9;
    @(negedge clk);
    cfg_clear = 1'b0; cfg_we = 1'b0;
    for (int e = 0; e < 16; e++) exp_tbl[e] = 4'(e);
    read_all("clear priority");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
