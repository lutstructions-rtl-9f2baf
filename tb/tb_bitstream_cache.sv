// Testbench of bitstream_cache at its default sizes (16 sets of one 8 KiB
// bitstream, 256-bit refill, 2048-bit output). A behavioural last-level
// cache answers block requests after a random delay with 256 beats whose
// contents are a function of address and beat number, sometimes with
// idle cycles between beats. Checked: every streamed word against that
// function, rsp_last, the block-aligned refill address, the number of
// refill beats, hit/miss decisions against a tag model, and the hit
// timing (first word two cycles after the request is accepted, then one
// word per cycle).
module tb_bitstream_cache;
  localparam int unsigned SETS = 16, BLOCK_BITS = 65536, FILL_W = 256, CFG_W = 2048;
  localparam int unsigned NBEATS = BLOCK_BITS / FILL_W, NWORDS = BLOCK_BITS / CFG_W;
  localparam int unsigned BPW = CFG_W / FILL_W;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic req_valid, req_ready, rsp_valid, rsp_last;
  logic [31:0] req_addr;
  logic [CFG_W-1:0] rsp_data;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [FILL_W-1:0] mem_rsp_data;
  logic evt_hit, evt_miss;

  bitstream_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [FILL_W-1:0] beat_data(logic [31:0] blk, int unsigned b);
    logic [FILL_W-1:0] d;
    for (int i = 0; i < FILL_W / 32; i++) d[32*i +: 32] = (blk * 32'h9E37_79B9) ^ (b * 32'h0101_0101) ^ 32'(i);
    return d;
  endfunction

  // ---- behavioural last-level cache ----
  int n_fills = 0, n_gaps = 0;
  initial begin
    mem_req_ready = 1'b0; mem_rsp_valid = 1'b0; mem_rsp_data = '0;
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        logic [31:0] blk;
        blk = mem_req_addr;
        check(blk % (BLOCK_BITS / 8) == 0, "refill address block aligned");
        repeat ($urandom % 3) @(negedge clk);
        mem_req_ready = 1'b1;
        @(negedge clk);
        mem_req_ready = 1'b0;
        repeat (2 + $urandom % 4) @(negedge clk);
        for (int b = 0; b < NBEATS; b++) begin
          if ($urandom % 8 == 0) begin
            mem_rsp_valid = 1'b0;
            n_gaps++;
            @(negedge clk);
          end
          mem_rsp_valid = 1'b1;
          mem_rsp_data  = beat_data(blk, b);
          @(negedge clk);
        end
        mem_rsp_valid = 1'b0;
        n_fills++;
      end
    end
  end

  logic        tag_v [SETS];
  logic [31:0] tag_a [SETS];
  int n_hit = 0, n_miss = 0, n_conflict = 0;

  task automatic fetch(logic [31:0] blk);
    int unsigned set, fills_before, t0, w;
    bit exp_hit;
    set = (blk / (BLOCK_BITS / 8)) % SETS;
    exp_hit = tag_v[set] && tag_a[set] == blk;
    if (!exp_hit && tag_v[set]) n_conflict++;
    fills_before = n_fills;
    req_valid = 1'b1;
    req_addr  = blk + 32'($urandom % (BLOCK_BITS / 8));   // any byte of the block
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    check(evt_hit == exp_hit && evt_miss == !exp_hit, $sformatf("hit decision for %h", blk));
    if (exp_hit) n_hit++; else n_miss++;
    @(negedge clk);
    req_valid = 1'b0;
    t0 = 1; w = 0;
    while (w < NWORDS) begin
      #1;
      if (rsp_valid) begin
        logic [CFG_W-1:0] e;
        for (int i = 0; i < BPW; i++) e[FILL_W*i +: FILL_W] = beat_data(blk, w * BPW + i);
        check(rsp_data == e, $sformatf("word %0d of %h", w, blk));
        check(rsp_last == (w == NWORDS - 1), "rsp_last");
        if (exp_hit && w == 0) check(t0 == 2, $sformatf("hit: first word after %0d cycles", t0));
        w++;
      end else if (w > 0) begin
        check(0, "gap inside the stream");
      end
      @(negedge clk);
      t0++;
    end
    check(n_fills == fills_before + (exp_hit ? 0 : 1), "refills");
    tag_v[set] = 1'b1; tag_a[set] = blk;
  endtask

  initial begin
    for (int s = 0; s < SETS; s++) tag_v[s] = 1'b0;
    rst_n = 1'b0; req_valid = 1'b0; req_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 60; i++) begin
      // 24 distinct bitstreams over 16 sets: hits, cold misses and conflicts.
      fetch(32'h0010_0000 + 32'($urandom % 24) * (BLOCK_BITS / 8));
      repeat ($urandom % 3) @(negedge clk);
    end
    check(n_hit > 0 && n_miss > 0 && n_conflict > 0 && n_gaps > 0,
          $sformatf("hit %0d miss %0d conflict %0d gaps %0d", n_hit, n_miss, n_conflict, n_gaps));
    $display("hits %0d misses %0d conflict misses %0d", n_hit, n_miss, n_conflict);
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
