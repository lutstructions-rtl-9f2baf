// Reconfigurable-instruction unit of a RISC-V core ("LUTstructions").
//
// The unit sits beside the core's ALU. It receives custom-3 R-type
// instructions with their two source values and returns one result,
// like any functional unit. Inside, the instruction disambiguator keeps
// SLOTS small fabrics of LUT4_4 cells, each programmed with one
// instruction bitstream. The bitstream cache (BL1) sits next to the L1
// instruction and data caches, refills from the last-level cache at FILL_W
// bits per cycle and feeds the fabrics at 128*P bits per cycle, so a missing
// instruction implementation is loaded in 16*Y/P cycles (32 cycles at the
// default P=16).
//
// Interface: iss_* is the issue handshake from the core (held until
// iss_ready), res_* returns the result ceil(Y/S) cycles (5 at S=7) after
// issue on a hit. mem_* is BL1's block refill port to the last-level cache:
// one request per 8 KiB block, answered by BLOCK_BITS/FILL_W beats in order.
// bs_base is the bitstream library's base address (a core control
// register): bitstream n lives at bs_base + n*8 KiB. evt_* pulse once per
// event for performance counters.
//
// From the paper: the composition (disambiguator with fabrics, BL1 with a
// 2048-bit link to the core and a 256-bit link to the LLC) and the default
// sizes. The port protocol is this design's own.
module lutstructions_top #(
  parameter int unsigned SLOTS    = 2,
  parameter int unsigned W        = 32,
  parameter int unsigned Y        = 32,
  parameter int unsigned S        = 7,
  parameter int unsigned P        = 16,
  parameter int unsigned BL1_SETS = 16,
  parameter int unsigned FILL_W   = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        bs_base,
  // core issue / result
  input  logic               iss_valid,
  input  lut_pkg::rtype_t    iss_instr,
  input  logic [W-1:0]       iss_rs1,
  input  logic [W-1:0]       iss_rs2,
  output logic               iss_ready,
  output logic               res_valid,
  output logic [4:0]         res_rd,
  output logic [W-1:0]       res_data,
  // BL1 refill from the last-level cache
  output logic               mem_req_valid,
  output logic [31:0]        mem_req_addr,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  logic [FILL_W-1:0]  mem_rsp_data,
  // events
  output logic               evt_id_hit,
  output logic               evt_id_miss,
  output logic               evt_id_loaded,
  output logic               evt_bl1_hit,
  output logic               evt_bl1_miss
);
  import lut_pkg::*;

  localparam int unsigned CFG_W      = 4 * W * P;
  localparam int unsigned BLOCK_BITS = bitstream_bytes(W, Y) * 8;

  logic              bl_req_valid, bl_req_ready;
  logic [31:0]       bl_req_addr;
  logic              bl_rsp_valid, bl_rsp_last;
  logic [CFG_W-1:0]  bl_rsp_data;

  instr_disambiguator #(.SLOTS(SLOTS), .W(W), .Y(Y), .S(S), .P(P)) u_id (
    .clk         (clk),
    .rst_n       (rst_n),
    .bs_base     (bs_base),
    .iss_valid   (iss_valid),
    .iss_instr   (iss_instr),
    .iss_rs1     (iss_rs1),
    .iss_rs2     (iss_rs2),
    .iss_ready   (iss_ready),
    .res_valid   (res_valid),
    .res_rd      (res_rd),
    .res_data    (res_data),
    .bl_req_valid(bl_req_valid),
    .bl_req_addr (bl_req_addr),
    .bl_req_ready(bl_req_ready),
    .bl_rsp_valid(bl_rsp_valid),
    .bl_rsp_data (bl_rsp_data),
    .evt_hit     (evt_id_hit),
    .evt_miss    (evt_id_miss),
    .evt_loaded  (evt_id_loaded)
  );

  bitstream_cache #(
    .SETS      (BL1_SETS),
    .BLOCK_BITS(BLOCK_BITS),
    .FILL_W    (FILL_W),
    .CFG_W     (CFG_W),
    .ADDR_W    (32)
  ) u_bl1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .req_valid    (bl_req_valid),
    .req_addr     (bl_req_addr),
    .req_ready    (bl_req_ready),
    .rsp_valid    (bl_rsp_valid),
    .rsp_data     (bl_rsp_data),
    .rsp_last     (bl_rsp_last),
    .mem_req_valid(mem_req_valid),
    .mem_req_addr (mem_req_addr),
    .mem_req_ready(mem_req_ready),
    .mem_rsp_valid(mem_rsp_valid),
    .mem_rsp_data (mem_rsp_data),
    .evt_hit      (evt_bl1_hit),
    .evt_miss     (evt_bl1_miss)
  );

  // The stream always covers exactly one fabric configuration.
  a_last_matches: assert property (@(posedge clk) disable iff (!rst_n)
    bl_rsp_last |-> bl_rsp_valid && evt_id_loaded);

endmodule
