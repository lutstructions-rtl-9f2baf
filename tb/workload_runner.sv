// Runs the loop-style workloads on one lutstructions_top instance with
// SLOTS slots (other sizes at their defaults) and reports cycle counts.
// Bitstream 0 is the ripple-carry adder (an arithmetic instruction) and
// bitstream 1 permutes the bits of each operand and XORs them (a
// bit-manipulation instruction); they are the two soft instructions of a STREAM-like loop. Phases:
//   A  N calls of bitstream 0, one per cycle (single-instruction loop);
//   B  N calls of bitstream 1, one per cycle;
//   C  N iterations that alternate bitstream 0 and 1 (two instructions
//      per iteration, so two implementation misses per iteration when
//      SLOTS=1 and none after warm-up when SLOTS>=2).
// Every result is checked; cycles_* give each phase's length from first
// issue to last result, misses_* the implementation misses in the phase.
module workload_runner #(
  parameter int unsigned SLOTS = 1,
  parameter int unsigned N     = 64
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles_a, output int cycles_b, output int cycles_c,
  output int   misses_a, output int misses_b, output int misses_c
);
  import lut_pkg::*;
  import fabric_ref_pkg::*;

  localparam int unsigned W = 32;
  localparam logic [31:0] BASE = 32'h0010_0000;

  logic rst_n;
  logic iss_valid, iss_ready, res_valid;
  rtype_t iss_instr;
  logic [W-1:0] iss_rs1, iss_rs2, res_data;
  logic [4:0] res_rd;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [255:0] mem_rsp_data;
  logic evt_id_hit, evt_id_miss, evt_id_loaded, evt_bl1_hit, evt_bl1_miss;
  int n_requests, n_bad_addr;

  lutstructions_top #(.SLOTS(SLOTS)) dut (
    .clk, .rst_n, .bs_base(BASE),
    .iss_valid, .iss_instr, .iss_rs1, .iss_rs2, .iss_ready,
    .res_valid, .res_rd, .res_data,
    .mem_req_valid, .mem_req_addr, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data,
    .evt_id_hit, .evt_id_miss, .evt_id_loaded, .evt_bl1_hit, .evt_bl1_miss
  );

  llc_model #(.NBS(2)) u_llc (
    .clk, .base(BASE), .mem_req_valid, .mem_req_addr, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_data, .n_requests, .n_bad_addr
  );

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int n_miss = 0;
  always @(posedge clk) if (rst_n && evt_id_miss) n_miss++;

  logic [W-1:0] expq [$];
  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (expq.size() == 0 || res_data != expq[0]) begin
      failures++;
      if (failures < 10) $display("FAIL [SLOTS=%0d] result %h", SLOTS, res_data);
    end
    if (expq.size() > 0) void'(expq.pop_front());
  end

  task automatic call(int idx);
    logic [W-1:0] a, b;
    logic [2:0] f3;
    a = $urandom; b = $urandom; f3 = 3'($urandom);
    iss_valid = 1'b1;
    iss_instr = '{funct7: 7'(idx), rs2: 5'd2, rs1: 5'd1, funct3: f3, rd: 5'd3, opcode: OPC_CUSTOM3};
    iss_rs1 = a; iss_rs2 = b;
    #1;
    while (!iss_ready) begin @(negedge clk); #1; end
    expq.push_back(idx == 0 ? a + b : W'(u_llc.bs[1].permute_xor(vec_t'(a), vec_t'(b))));
    @(negedge clk);
    iss_valid = 1'b0;
  endtask

  task automatic finish_phase(int unsigned t0, int m0, output int cycles, output int misses);
    while (expq.size() > 0) @(negedge clk);
    cycles = int'(cyc - t0);
    misses = n_miss - m0;
  endtask

  initial begin
    int unsigned t0;
    int m0;
    done = 0; checks = 0; failures = 0;
    rst_n = 1'b0; iss_valid = 1'b0; iss_instr = '0; iss_rs1 = '0; iss_rs2 = '0;
    @(negedge clk);
    u_llc.bs[0] = new(W, 32, 16); u_llc.bs[0].set_chain(0);
    u_llc.bs[1] = new(W, 32, 16);
    if (!u_llc.bs[1].set_permute_xor()) begin
      failures++;
      $display("FAIL no routable permutation found");
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // warm up BL1 (and the slots) with one call of each
    call(0); call(1);
    repeat (8) @(negedge clk);

    t0 = cyc; m0 = n_miss;
    for (int i = 0; i < N; i++) call(0);
    finish_phase(t0, m0, cycles_a, misses_a);
    t0 = cyc; m0 = n_miss;
    for (int i = 0; i < N; i++) call(1);
    finish_phase(t0, m0, cycles_b, misses_b);
    t0 = cyc; m0 = n_miss;
    for (int i = 0; i < N; i++) begin call(0); call(1); end
    finish_phase(t0, m0, cycles_c, misses_c);
    done = 1;
  end
endmodule
