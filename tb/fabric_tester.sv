// Test sequence for one lut_fabric instance, used by tb_lut_fabric with
// several parameter sets. It
//  1. loads a random configuration without gaps and checks that cfg_done
//     comes exactly 16*Y/P cycles after the first word;
//  2. streams random 4W-bit operands every cycle and compares op_out,
//     ceil(Y/S) cycles later, with the reference model's evaluation;
//  3. reloads with random gaps in cfg_valid and repeats the comparison;
//  4. loads the adder chain and checks a+b, computed without the model;
//  5. loads the routed bitstream that permutes a and b (one permutation
//     each) and XORs them, and checks it against the permutations applied
//     in plain SystemVerilog.
// done rises when finished; checks/failures are the running counts.
module fabric_tester #(
  parameter int unsigned W = 32,
  parameter int unsigned Y = 32,
  parameter int unsigned S = 7,
  parameter int unsigned P = 16,
  parameter int unsigned NOPS = 200
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import fabric_ref_pkg::*;

  localparam int unsigned LAT = (Y + S - 1) / S;

  logic                cfg_clear, cfg_mode, cfg_valid, cfg_done;
  logic [4*W*P-1:0]    cfg_data;
  logic [4*W-1:0]      op_in;
  logic [W-1:0]        op_out;

  lut_fabric #(.W(W), .Y(Y), .S(S), .P(P)) dut (
    .clk, .cfg_clear, .cfg_mode, .cfg_valid, .cfg_data, .cfg_done, .op_in, .op_out
  );

  fabric_ref m;
  logic [W-1:0] expq [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [W%0d Y%0d S%0d P%0d] %s", W, Y, S, P, what);
    end
  endtask

  task automatic load(bit gaps);
    int unsigned n, cyc, first;
    bit got_done;
    @(negedge clk);
    cfg_clear = 1'b1; cfg_mode = 1'b1; cfg_valid = 1'b0;
    @(negedge clk);
    cfg_clear = 1'b0;
    n = 0; cyc = 0; got_done = 0;
    while (n < m.num_words()) begin
      if (gaps && ($urandom % 3 == 0)) begin
        cfg_valid = 1'b0;
      end else begin
        cfg_valid = 1'b1;
        cfg_data  = (4*W*P)'(m.cfg_row(n));
        n++;
      end
      cyc++;
      #1;
      if (cfg_done) begin
        got_done = 1;
        check(n == m.num_words() && cfg_valid, "cfg_done on the last word");
      end
      @(negedge clk);
    end
    cfg_valid = 1'b0;
    check(got_done, "cfg_done seen");
    if (!gaps) check(cyc == 16 * Y / P, $sformatf("reconfiguration took %0d cycles", cyc));
    cfg_mode = 1'b0;
  endtask

  // Operands every cycle, results compared LAT cycles later.
  task automatic run_ops(int mode);
    int unsigned a, b;
    vec_t in, exp;
    expq.delete();
    for (int i = 0; i < NOPS + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        logic [W-1:0] e;
        e = expq.pop_front();
        check(op_out == e, $sformatf("op %0d: got %h expected %h", i - LAT, op_out, e));
      end
      if (i < NOPS) begin
        if (mode == 0) begin
          for (int j = 0; j < 4 * W; j += 32) in[j +: 32] = $urandom;
          in[1023:4*W] = '0;
          exp = m.eval(in);
          expq.push_back(W'(exp));
        end else begin
          bit [255:0] aa, bb;
          for (int j = 0; j < 256; j += 32) begin aa[j +: 32] = $urandom; bb[j +: 32] = $urandom; end
          in = m.operands(aa, bb, 3'($urandom));
          if (mode == 1) expq.push_back(W'(aa) + W'(bb));
          else           expq.push_back(W'(m.permute_xor(vec_t'(aa), vec_t'(bb))));
        end
        op_in = (4*W)'(in);
      end else begin
        op_in = '0;
      end
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    cfg_clear = 0; cfg_mode = 0; cfg_valid = 0; cfg_data = '0; op_in = '0;
    m = new(W, Y, P);
    m.set_random();
    load(0);
    run_ops(0);
    m.set_random();
    load(1);
    run_ops(0);
    m.set_chain(0);
    load(0);
    run_ops(1);
    check(m.set_permute_xor(), "routable permutation found");
    load(0);
    run_ops(2);
    done = 1;
  end
endmodule
