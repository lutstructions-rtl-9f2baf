// BL1: level-1 bitstream cache beside the instruction and data caches.
//
// Each block holds one whole bitstream (BLOCK_BITS = 65536, 8 KiB). The
// cache is direct mapped with SETS blocks; the byte address splits into
// {tag, set, offset}. Storage is one memory of rows ROW_W = max(FILL_W,
// CFG_W) bits wide: refills from the last-level cache arrive FILL_W bits
// per cycle and are written into their slice of a row through a per-slice
// write strobe, while the instruction disambiguator is served CFG_W = 4W*P
// bits per cycle.
//
// Request side (toward the instruction disambiguator): req_valid/req_ready
// with the bitstream's byte address, accepted in the idle state. On a hit
// the block is streamed as BLOCK_BITS/CFG_W words, one per cycle, starting
// two cycles after the request is accepted (one cycle to start the read,
// one for the registered memory output); rsp_last marks the final word.
// On a miss the cache first asks memory for the block (mem_req_valid/
// mem_req_ready with the block address), takes BLOCK_BITS/FILL_W beats in
// address order on mem_rsp_valid, marks the block valid and then streams
// it the same way.
//
// From the paper: block = one 8 KiB bitstream, 16 sets, 256-bit refill
// path, 2048-bit path to the core, chunks of max(refill, configuration)
// width accessed with a strobe, block RAM storage. This design's own
// choices: direct mapping, refill of the whole block before streaming, and
// the handshakes.
module bitstream_cache #(
  parameter int unsigned SETS       = 16,
  parameter int unsigned BLOCK_BITS = 65536,
  parameter int unsigned FILL_W     = 256,
  parameter int unsigned CFG_W      = 2048,
  parameter int unsigned ADDR_W     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction disambiguator side
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              req_ready,
  output logic              rsp_valid,
  output logic [CFG_W-1:0]  rsp_data,
  output logic              rsp_last,
  // last-level cache side
  output logic              mem_req_valid,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  logic [FILL_W-1:0] mem_rsp_data,
  // events
  output logic              evt_hit,
  output logic              evt_miss
);

  localparam int unsigned ROW_W   = (FILL_W > CFG_W) ? FILL_W : CFG_W;
  localparam int unsigned ROWS    = BLOCK_BITS / ROW_W;     // rows per block
  localparam int unsigned BPR     = ROW_W / FILL_W;         // refill beats per row
  localparam int unsigned WPR     = ROW_W / CFG_W;          // output words per row
  localparam int unsigned NBEATS  = BLOCK_BITS / FILL_W;
  localparam int unsigned NWORDS  = BLOCK_BITS / CFG_W;
  localparam int unsigned OFF_W   = $clog2(BLOCK_BITS / 8);
  localparam int unsigned IDX_W   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W   = ADDR_W - OFF_W - ((SETS > 1) ? IDX_W : 0);
  localparam int unsigned RA_W    = $clog2(SETS * ROWS);
  localparam int unsigned BEAT_W  = $clog2(NBEATS);
  localparam int unsigned WORD_W  = (NWORDS > 1) ? $clog2(NWORDS) : 1;
  localparam int unsigned BSEL_W  = (BPR > 1) ? $clog2(BPR) : 1;
  localparam int unsigned WSEL_W  = (WPR > 1) ? $clog2(WPR) : 1;

  typedef enum logic [1:0] {ST_IDLE, ST_MREQ, ST_FILL, ST_STREAM} state_e;

  state_e             state_q;
  logic [IDX_W-1:0]   set_q;
  logic [TAG_W-1:0]   tag_q;
  logic [ADDR_W-1:0]  blk_q;        // block-aligned address of the request
  logic [BEAT_W-1:0]  beat_q;
  logic [WORD_W-1:0]  word_q;

  logic               valid_q [SETS];
  logic [TAG_W-1:0]   tags_q  [SETS];

  logic [ROW_W-1:0]   mem_q [SETS * ROWS];
  logic [ROW_W-1:0]   rdata_q;
  logic               rvalid_q;
  logic               rlast_q;
  logic [WSEL_W-1:0]  rsel_q;

  logic [IDX_W-1:0]   req_set;
  logic [TAG_W-1:0]   req_tag;
  logic               lookup_hit;

  assign req_set    = (SETS > 1) ? IDX_W'(req_addr >> OFF_W) : '0;
  assign req_tag    = TAG_W'(req_addr >> (ADDR_W - TAG_W));
  assign lookup_hit = valid_q[req_set] && (tags_q[req_set] == req_tag);

  assign req_ready  = (state_q == ST_IDLE);
  assign evt_hit    = req_valid && req_ready && lookup_hit;
  assign evt_miss   = req_valid && req_ready && !lookup_hit;

  assign mem_req_valid = (state_q == ST_MREQ);
  assign mem_req_addr  = blk_q;

  // Row addresses of the refill write and the stream read.
  logic [RA_W-1:0]   waddr, raddr;
  logic [BSEL_W-1:0] wslice;
  assign waddr  = RA_W'(set_q) * RA_W'(ROWS) + RA_W'(beat_q / BPR);
  assign wslice = BSEL_W'(beat_q % BPR);
  assign raddr  = RA_W'(set_q) * RA_W'(ROWS) + RA_W'(word_q / WPR);

  // Control.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      set_q   <= '0;
      tag_q   <= '0;
      blk_q   <= '0;
      beat_q  <= '0;
      word_q  <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= 1'b0;
        tags_q[s]  <= '0;
      end
    end else begin
      unique case (state_q)
        ST_IDLE: if (req_valid) begin
          set_q  <= req_set;
          tag_q  <= req_tag;
          blk_q  <= req_addr & ~ADDR_W'(BLOCK_BITS / 8 - 1);
          word_q <= '0;
          beat_q <= '0;
          if (lookup_hit) begin
            state_q <= ST_STREAM;
          end else begin
            valid_q[req_set] <= 1'b0;
            state_q          <= ST_MREQ;
          end
        end
        ST_MREQ: if (mem_req_ready) state_q <= ST_FILL;
        ST_FILL: if (mem_rsp_valid) begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == BEAT_W'(NBEATS - 1)) begin
            valid_q[set_q] <= 1'b1;
            tags_q[set_q]  <= tag_q;
            state_q        <= ST_STREAM;
          end
        end
        ST_STREAM: begin
          word_q <= word_q + 1'b1;
          if (word_q == WORD_W'(NWORDS - 1)) state_q <= ST_IDLE;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // Block memory: strobed refill writes, registered reads.
  always_ff @(posedge clk) begin
    if (state_q == ST_FILL && mem_rsp_valid) begin
      for (int b = 0; b < BPR; b++)
        if (wslice == BSEL_W'(b)) mem_q[waddr][b*FILL_W +: FILL_W] <= mem_rsp_data;
    end
    if (state_q == ST_STREAM) rdata_q <= mem_q[raddr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rvalid_q <= 1'b0;
      rlast_q  <= 1'b0;
      rsel_q   <= '0;
    end else begin
      rvalid_q <= (state_q == ST_STREAM);
      rlast_q  <= (state_q == ST_STREAM) && (word_q == WORD_W'(NWORDS - 1));
      rsel_q   <= WSEL_W'(word_q % WPR);
    end
  end

  assign rsp_valid = rvalid_q;
  assign rsp_last  = rlast_q;
  assign rsp_data  = rdata_q[rsel_q*CFG_W +: CFG_W];

  a_no_req_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> state_q == ST_FILL);

endmodule
