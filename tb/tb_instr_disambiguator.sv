// Testbench of instr_disambiguator at its default sizes (2 slots, 32x32
// fabrics, S=7, P=16). A behavioural bitstream cache answers each request
// after a random delay with the 32 words of the requested bitstream,
// produced by the reference model. Four bitstreams are used: 0 = adder,
// 1 = funct3[0]-selected AND/XOR, 2 and 3 = random tables; 0/2 share slot 0
// and 1/3 share slot 1, so slot conflicts evict bitstreams.
// Checked: every result (value and rd, in order), the 5-cycle hit latency,
// the 32-cycle load from the first word to the slot becoming valid, the
// request address bs_base + index * 8 KiB, and that hits issue back to back.
module tb_instr_disambiguator;
  import lut_pkg::*;
  import fabric_ref_pkg::*;

  localparam int unsigned W = 32, Y = 32, S = 7, P = 16, SLOTS = 2;
  localparam int unsigned LAT = (Y + S - 1) / S;
  localparam int unsigned NW = 16 * Y / P;
  localparam logic [31:0] BASE = 32'h0010_0000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic iss_valid, iss_ready, res_valid;
  rtype_t iss_instr;
  logic [W-1:0] iss_rs1, iss_rs2, res_data;
  logic [4:0] res_rd;
  logic bl_req_valid, bl_req_ready, bl_rsp_valid;
  logic [31:0] bl_req_addr;
  logic [4*W*P-1:0] bl_rsp_data;
  logic evt_hit, evt_miss, evt_loaded;

  instr_disambiguator dut (
    .clk, .rst_n, .bs_base(BASE),
    .iss_valid, .iss_instr, .iss_rs1, .iss_rs2, .iss_ready,
    .res_valid, .res_rd, .res_data,
    .bl_req_valid, .bl_req_addr, .bl_req_ready, .bl_rsp_valid, .bl_rsp_data,
    .evt_hit, .evt_miss, .evt_loaded
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  fabric_ref bs [4];

  // ---- behavioural bitstream cache ----
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int unsigned first_word_cyc, n_loads = 0;
  initial begin
    bl_req_ready = 1'b0; bl_rsp_valid = 1'b0; bl_rsp_data = '0;
    forever begin
      @(negedge clk);
      if (bl_req_valid) begin
        int unsigned idx;
        idx = (bl_req_addr - BASE) / 8192;
        check(idx < 4 && (bl_req_addr - BASE) % 8192 == 0,
              $sformatf("request address %h", bl_req_addr));
        repeat ($urandom % 3) @(negedge clk);
        bl_req_ready = 1'b1;
        @(negedge clk);
        bl_req_ready = 1'b0;
        repeat (1 + $urandom % 3) @(negedge clk);
        for (int k = 0; k < NW; k++) begin
          bl_rsp_valid = 1'b1;
          bl_rsp_data  = (4*W*P)'(bs[idx].cfg_row(k));
          if (k == 0) first_word_cyc = cyc;
          #1;
          if (k == NW - 1) check(evt_loaded, "slot loaded with the last word");
          else             check(!evt_loaded, "slot not loaded before the last word");
          @(negedge clk);
        end
        bl_rsp_valid = 1'b0;
        n_loads++;
      end
    end
  end

  // ---- scoreboard ----
  typedef struct { logic [4:0] rd; logic [W-1:0] data; int unsigned cyc; } exp_t;
  exp_t q [$];
  int n_b2b = 0, n_stall = 0, n_hit = 0, n_miss = 0, n_evict = 0;
  int unsigned last_issue = 0;
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
    if (evt_hit) n_hit++;
    if (evt_miss) begin
      n_miss++;
      if (resident[iss_instr.funct7 % SLOTS] >= 0) n_evict++;
    end
    if (evt_loaded) begin
      check(cyc - first_word_cyc == NW - 1, $sformatf("load took %0d cycles", cyc - first_word_cyc + 1));
      resident[iss_instr.funct7 % SLOTS] = iss_instr.funct7;
    end
  end

  function automatic logic [W-1:0] expect_of(int idx, logic [W-1:0] a, logic [W-1:0] b, logic [2:0] f3);
    vec_t v;
    case (idx)
      0: return a + b;
      1: return f3[0] ? (a & b) : (a ^ b);
      default: begin
        v = bs[idx].eval(bs[idx].operands(256'(a), 256'(b), f3));
        return W'(v);
      end
    endcase
  endfunction

  task automatic issue(int idx, logic [W-1:0] a, logic [W-1:0] b, logic [2:0] f3, logic [4:0] rd);
    exp_t e;
    iss_valid = 1'b1;
    iss_instr = '{funct7: 7'(idx), rs2: 5'd2, rs1: 5'd1, funct3: f3, rd: rd, opcode: OPC_CUSTOM3};
    iss_rs1 = a; iss_rs2 = b;
    #1;
    while (!iss_ready) begin
      @(negedge clk);
      #1;
    end
    if (cyc == last_issue + 1) n_b2b++;
    last_issue = cyc;
    e.rd = rd; e.data = expect_of(idx, a, b, f3); e.cyc = cyc;
    q.push_back(e);
    @(negedge clk);
    iss_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < 4; i++) bs[i] = new(W, Y, P);
    bs[0].set_chain(0);
    bs[1].set_chain(1);
    bs[2].set_random();
    bs[3].set_random();
    for (int s = 0; s < SLOTS; s++) resident[s] = -1;
    rst_n = 1'b0; iss_valid = 1'b0; iss_instr = '0; iss_rs1 = '0; iss_rs2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Runs of the same bitstream (hits back to back), then switches.
    for (int blk = 0; blk < 40; blk++) begin
      int idx, len;
      idx = $urandom % 4;
      len = 1 + $urandom % 12;
      for (int i = 0; i < len; i++) begin
        issue(idx, $urandom, $urandom, 3'($urandom), 5'($urandom));
        if ($urandom % 4 == 0) @(negedge clk);
      end
    end
    repeat (LAT + 2) @(negedge clk);
    check(q.size() == 0, "all results returned");
    check(n_hit > 0 && n_miss > 0 && n_evict > 0 && n_b2b > 0 && n_stall > 0,
          $sformatf("mechanisms: hit %0d miss %0d evict %0d back-to-back %0d stall %0d",
                    n_hit, n_miss, n_evict, n_b2b, n_stall));
    $display("hits %0d misses %0d evictions %0d back-to-back %0d stall cycles %0d loads %0d",
             n_hit, n_miss, n_evict, n_b2b, n_stall, n_loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
