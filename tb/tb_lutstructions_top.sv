// End-to-end testbench of lutstructions_top at its default sizes (2 slots,
// 32x32 fabrics, S=7, P=16, 16-set BL1, 256-bit refill). The last-level
// cache is the behavioural llc_model holding six bitstreams at 0x100000:
// 0 = adder, 1 = funct3[0]-selected AND/XOR, 2 = routed bit permutation
// of each operand followed by XOR, 3..5 = random tables.
// A core model issues runs of custom-3 instructions, holding each while
// iss_ready is low, and a scoreboard checks every result against a+b,
// the AND/XOR rule or the reference model.
// Counted, and each required at least once: slot hit, implementation miss,
// slot eviction, BL1 hit, BL1 miss (refill), issue stall, back-to-back
// hits, both funct3 behaviours. Timing checked: 5-cycle hit latency and a
// 36-cycle miss penalty when the bitstream is in BL1 and nothing is in
// flight (4 cycles of hand-over plus 32 words of configuration).
module tb_lutstructions_top;
  import lut_pkg::*;
  import fabric_ref_pkg::*;

  localparam int unsigned W = 32, Y = 32, S = 7, P = 16, SLOTS = 2;
  localparam int unsigned LAT = (Y + S - 1) / S;
  localparam int unsigned NW = 16 * Y / P;
  localparam int unsigned NBS = 6;
  localparam logic [31:0] BASE = 32'h0010_0000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
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

  lutstructions_top dut (
    .clk, .rst_n, .bs_base(BASE),
    .iss_valid, .iss_instr, .iss_rs1, .iss_rs2, .iss_ready,
    .res_valid, .res_rd, .res_data,
    .mem_req_valid, .mem_req_addr, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data,
    .evt_id_hit, .evt_id_miss, .evt_id_loaded, .evt_bl1_hit, .evt_bl1_miss
  );

  llc_model #(.W(W), .Y(Y), .P(P), .FILL_W(256), .NBS(NBS)) u_llc (
    .clk, .base(BASE), .mem_req_valid, .mem_req_addr, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_data, .n_requests, .n_bad_addr
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic [4:0] rd; logic [W-1:0] data; int unsigned cyc; } exp_t;
  exp_t q [$];
  int n_hit = 0, n_miss = 0, n_evict = 0, n_bl1_hit = 0, n_bl1_miss = 0;
  int n_stall = 0, n_b2b = 0, n_f3_and = 0, n_f3_xor = 0, n_pen36 = 0;
  int unsigned last_issue = 0, miss_cyc = 0;
  bit  miss_bl1_hit, miss_inflight;
  int resident [SLOTS];

  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      if (q.size() == 0) check(0, "unexpected result");
      else begin
        exp_t e;
        e = q.pop_front();
        check(res_rd == e.rd && res_data == e.data,
              $sformatf("result rd %0d=%h, expected rd %0d=%h", res_rd, res_data, e.rd, e.data));
        check(cyc - e.cyc == LAT, $sformatf("hit latency %0d", cyc - e.cyc));
      end
    end
    if (iss_valid && !iss_ready) n_stall++;
    if (evt_id_hit) n_hit++;
    if (evt_id_miss) begin
      n_miss++;
      miss_cyc = cyc;
      miss_inflight = (q.size() > 0);
      if (resident[iss_instr.funct7 % SLOTS] >= 0) n_evict++;
    end
    if (evt_bl1_hit) begin n_bl1_hit++; miss_bl1_hit = 1; end
    if (evt_bl1_miss) begin n_bl1_miss++; miss_bl1_hit = 0; end
    if (evt_id_loaded) resident[iss_instr.funct7 % SLOTS] = iss_instr.funct7;
  end

  function automatic logic [W-1:0] expect_of(int idx, logic [W-1:0] a, logic [W-1:0] b, logic [2:0] f3);
    case (idx)
      0: return a + b;
      1: return f3[0] ? (a & b) : (a ^ b);
      2: return W'(u_llc.bs[2].permute_xor(vec_t'(a), vec_t'(b)));
      default: return W'(u_llc.bs[idx].eval(u_llc.bs[idx].operands(256'(a), 256'(b), f3)));
    endcase
  endfunction

  task automatic issue(int idx, logic [W-1:0] a, logic [W-1:0] b, logic [2:0] f3, logic [4:0] rd);
    exp_t e;
    bit missed;
    iss_valid = 1'b1;
    iss_instr = '{funct7: 7'(idx), rs2: 5'd2, rs1: 5'd1, funct3: f3, rd: rd, opcode: OPC_CUSTOM3};
    iss_rs1 = a; iss_rs2 = b;
    missed = 0;
    #1;
    while (!iss_ready) begin
      missed = 1;
      @(negedge clk);
      #1;
    end
    if (missed && miss_bl1_hit && !miss_inflight) begin
      check(cyc - miss_cyc == NW + 4, $sformatf("miss penalty %0d", cyc - miss_cyc));
      n_pen36++;
    end
    if (cyc == last_issue + 1) n_b2b++;
    last_issue = cyc;
    if (idx == 1) begin
      if (f3[0]) n_f3_and++; else n_f3_xor++;
    end
    e.rd = rd; e.data = expect_of(idx, a, b, f3); e.cyc = cyc;
    q.push_back(e);
    @(negedge clk);
    iss_valid = 1'b0;
  endtask

  initial begin
    for (int s = 0; s < SLOTS; s++) resident[s] = -1;
    rst_n = 1'b0; iss_valid = 1'b0; iss_instr = '0; iss_rs1 = '0; iss_rs2 = '0;
    @(negedge clk);
    for (int i = 0; i < NBS; i++) u_llc.bs[i] = new(W, Y, P);
    u_llc.bs[0].set_chain(0);
    u_llc.bs[1].set_chain(1);
    check(u_llc.bs[2].set_permute_xor(), "routable permutation found");
    for (int i = 3; i < NBS; i++) u_llc.bs[i].set_random();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int blk = 0; blk < 30; blk++) begin
      int idx, len;
      idx = $urandom % NBS;
      len = 1 + $urandom % 10;
      for (int i = 0; i < len; i++) begin
        issue(idx, $urandom, $urandom, 3'($urandom), 5'($urandom));
        if ($urandom % 4 == 0) @(negedge clk);
      end
      if ($urandom % 3 == 0) repeat (LAT + 1) @(negedge clk);
    end
    repeat (LAT + 2) @(negedge clk);
    check(q.size() == 0, "all results returned");
    check(n_bad_addr == 0, "refill addresses");
    check(n_requests == n_bl1_miss, "one refill per BL1 miss");
    check(n_hit > 0,      "mechanism: slot hit");
    check(n_miss > 0,     "mechanism: implementation miss");
    check(n_evict > 0,    "mechanism: slot eviction");
    check(n_bl1_hit > 0,  "mechanism: BL1 hit");
    check(n_bl1_miss > 0, "mechanism: BL1 miss");
    check(n_stall > 0,    "mechanism: issue stall");
    check(n_b2b > 0,      "mechanism: back-to-back issue");
    check(n_f3_and > 0 && n_f3_xor > 0, "mechanism: funct3 operand");
    check(n_pen36 > 0,    "mechanism: timed miss from BL1");
    $display("slot hits %0d, misses %0d (evictions %0d), BL1 hits %0d, BL1 misses %0d",
             n_hit, n_miss, n_evict, n_bl1_hit, n_bl1_miss);
    $display("stall cycles %0d, back-to-back issues %0d, funct3 and/xor %0d/%0d, timed misses %0d",
             n_stall, n_b2b, n_f3_and, n_f3_xor, n_pen36);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
