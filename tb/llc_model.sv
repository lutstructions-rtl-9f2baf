// Behavioural stand-in for the last-level cache on the bitstream cache's
// refill port. It holds NBS instruction bitstreams, described by
// fabric_ref objects, at base + n * 8 KiB. A request is accepted after
// 0-2 cycles, and the block follows 3-6 cycles later as 256-bit beats in
// address order, with an occasional idle cycle between beats.
module llc_model #(
  parameter int unsigned W = 32,
  parameter int unsigned Y = 32,
  parameter int unsigned P = 16,
  parameter int unsigned FILL_W = 256,
  parameter int unsigned NBS = 8
) (
  input  logic              clk,
  input  logic [31:0]       base,
  input  logic              mem_req_valid,
  input  logic [31:0]       mem_req_addr,
  output logic              mem_req_ready,
  output logic              mem_rsp_valid,
  output logic [FILL_W-1:0] mem_rsp_data,
  output int                n_requests,
  output int                n_bad_addr
);
  import fabric_ref_pkg::*;

  localparam int unsigned BS_BYTES = W * Y * 8;
  localparam int unsigned NBEATS   = W * Y * 64 / FILL_W;
  localparam int unsigned CFG_W    = 4 * W * P;

  fabric_ref bs [NBS];

  function automatic logic [FILL_W-1:0] beat(int unsigned idx, int unsigned b);
    logic [FILL_W-1:0] d;
    bit [8191:0] row;
    int unsigned lo;
    lo = b * FILL_W;
    row = bs[idx].cfg_row(lo / CFG_W);
    for (int i = 0; i < FILL_W; i++) begin
      if ((lo + i) / CFG_W != lo / CFG_W) row = bs[idx].cfg_row((lo + i) / CFG_W);
      d[i] = row[(lo + i) % CFG_W];
    end
    return d;
  endfunction

  initial begin
    mem_req_ready = 1'b0; mem_rsp_valid = 1'b0; mem_rsp_data = '0;
    n_requests = 0; n_bad_addr = 0;
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        int unsigned idx;
        idx = (mem_req_addr - base) / BS_BYTES;
        n_requests++;
        if ((mem_req_addr - base) % BS_BYTES != 0 || idx >= NBS) begin
          n_bad_addr++;
          idx = 0;
        end
        repeat ($urandom % 3) @(negedge clk);
        mem_req_ready = 1'b1;
        @(negedge clk);
        mem_req_ready = 1'b0;
        repeat (3 + $urandom % 4) @(negedge clk);
        for (int b = 0; b < NBEATS; b++) begin
          if ($urandom % 16 == 0) begin
            mem_rsp_valid = 1'b0;
            @(negedge clk);
          end
          mem_rsp_valid = 1'b1;
          mem_rsp_data  = beat(idx, b);
          @(negedge clk);
        end
        mem_rsp_valid = 1'b0;
      end
    end
  end
endmodule
