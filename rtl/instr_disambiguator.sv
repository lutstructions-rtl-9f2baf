// Instruction disambiguator (ID): a direct-mapped cache of reconfigurable
// instruction slots, each slot being one lut_fabric.
//
// The core hands over custom-3 R-type instructions together with the two
// source register values. funct7 is the reconfiguration index. Its low
// log2(SLOTS) bits select the slot, and the slot's tag (the full funct7 of
// the bitstream it holds) decides hit or miss.
//
// Hit: iss_ready is high in the same cycle, the operands go into all
// fabrics (rs1 on every row's in1, rs2 on in2, funct3 on in0 of rows 0..2,
// the other inputs 0), and res_valid/res_rd/res_data appear LATENCY =
// ceil(Y/S) cycles later from the slot's fabric. One instruction can issue
// every cycle; a small shift register records which slot and rd each
// in-flight result belongs to.
//
// Miss (implementation miss): iss_ready stays low and the instruction is
// held by the core. The ID waits until the target slot has no result in
// flight, clears its tag and its LUTs (identity tables), requests the
// bitstream at bs_base + funct7 * bitstream_bytes from the bitstream cache,
// and streams the 4W*P-bit words it returns into the fabric. When the
// fabric reports its last word stored, the tag is set and the held
// instruction issues as a hit. Other slots keep running meanwhile, but no
// new instruction issues until the miss is resolved (the core is in order).
//
// From the paper: slots as a direct-mapped cache indexed by the
// reconfiguration index, bitstreams contiguous from a library base, funct3
// as an input to the logic, fixed-latency pipelined execution. This
// design's own choices: the ready/valid handshakes, the slot index from the
// low funct7 bits, the operand wire assignment and the drain-before-load
// rule.
module instr_disambiguator #(
  parameter int unsigned SLOTS = 2,
  parameter int unsigned W     = 32,
  parameter int unsigned Y     = 32,
  parameter int unsigned S     = 7,
  parameter int unsigned P     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [31:0]          bs_base,
  // issue from the core
  input  logic                 iss_valid,
  input  lut_pkg::rtype_t      iss_instr,
  input  logic [W-1:0]         iss_rs1,
  input  logic [W-1:0]         iss_rs2,
  output logic                 iss_ready,
  // result to the core
  output logic                 res_valid,
  output logic [4:0]           res_rd,
  output logic [W-1:0]         res_data,
  // bitstream cache
  output logic                 bl_req_valid,
  output logic [31:0]          bl_req_addr,
  input  logic                 bl_req_ready,
  input  logic                 bl_rsp_valid,
  input  logic [4*W*P-1:0]     bl_rsp_data,
  // events
  output logic                 evt_hit,
  output logic                 evt_miss,
  output logic                 evt_loaded
);
  import lut_pkg::*;

  localparam int unsigned LAT      = fabric_latency(Y, S);
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int unsigned BS_BYTES = bitstream_bytes(W, Y);

  typedef enum logic [1:0] {ST_RUN, ST_DRAIN, ST_REQ, ST_LOAD} state_e;

  state_e         state_q;
  logic [SW-1:0]  m_slot_q;     // slot being reloaded
  logic [6:0]     m_f7_q;       // its new reconfiguration index
  logic           slot_v_q   [SLOTS];
  logic [6:0]     slot_tag_q [SLOTS];

  // in-flight results
  logic           pv_q    [LAT];
  logic [SW-1:0]  pslot_q [LAT];
  logic [4:0]     prd_q   [LAT];

  logic [SW-1:0]  idx;
  logic           hit;
  logic           drain_busy;

  logic [4*W-1:0] op_in;
  logic [W-1:0]   fab_out   [SLOTS];
  logic           fab_clear [SLOTS];
  logic           fab_mode  [SLOTS];
  logic           fab_done  [SLOTS];

  assign idx = SW'(iss_instr.funct7) & SW'(SLOTS - 1);
  assign hit = (state_q == ST_RUN) && slot_v_q[idx] && (slot_tag_q[idx] == iss_instr.funct7);

  assign iss_ready = hit;
  assign evt_hit   = iss_valid && hit;
  assign evt_miss  = iss_valid && (state_q == ST_RUN) && !hit;

  always_comb begin
    drain_busy = 1'b0;
    for (int i = 0; i < LAT; i++)
      if (pv_q[i] && pslot_q[i] == m_slot_q) drain_busy = 1'b1;
  end

  // Operand wires of column 0.
  always_comb begin
    op_in = '0;
    for (int r = 0; r < W; r++) begin
      op_in[4*r+1] = iss_rs1[r];
      op_in[4*r+2] = iss_rs2[r];
      if (r < 3) op_in[4*r+0] = iss_instr.funct3[r];
    end
  end

  // Control FSM.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q  <= ST_RUN;
      m_slot_q <= '0;
      m_f7_q   <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        slot_v_q[s]   <= 1'b0;
        slot_tag_q[s] <= '0;
      end
    end else begin
      unique case (state_q)
        ST_RUN: if (iss_valid && !hit) begin
          state_q  <= ST_DRAIN;
          m_slot_q <= idx;
          m_f7_q   <= iss_instr.funct7;
        end
        ST_DRAIN: if (!drain_busy) begin
          slot_v_q[m_slot_q] <= 1'b0;
          state_q            <= ST_REQ;
        end
        ST_REQ: if (bl_req_ready) state_q <= ST_LOAD;
        ST_LOAD: if (fab_done[m_slot_q]) begin
          slot_v_q[m_slot_q]   <= 1'b1;
          slot_tag_q[m_slot_q] <= m_f7_q;
          state_q              <= ST_RUN;
        end
        default: state_q <= ST_RUN;
      endcase
    end
  end

  assign bl_req_valid = (state_q == ST_REQ);
  assign bl_req_addr  = bs_base + 32'(m_f7_q) * 32'(BS_BYTES);
  assign evt_loaded   = (state_q == ST_LOAD) && fab_done[m_slot_q];

  // Result tracking.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pv_q[i] <= 1'b0;
    end else begin
      pv_q[0] <= iss_valid && hit;
      for (int i = 1; i < LAT; i++) pv_q[i] <= pv_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    pslot_q[0] <= idx;
    prd_q[0]   <= iss_instr.rd;
    for (int i = 1; i < LAT; i++) begin
      pslot_q[i] <= pslot_q[i-1];
      prd_q[i]   <= prd_q[i-1];
    end
  end

  assign res_valid = pv_q[LAT-1];
  assign res_rd    = prd_q[LAT-1];
  assign res_data  = fab_out[pslot_q[LAT-1]];

  // Slots.
  for (genvar s = 0; s < SLOTS; s++) begin : g_slot
    assign fab_clear[s] = (state_q == ST_DRAIN) && !drain_busy && (m_slot_q == SW'(s));
    assign fab_mode[s]  = (state_q == ST_LOAD) && (m_slot_q == SW'(s));

    lut_fabric #(.W(W), .Y(Y), .S(S), .P(P)) u_fabric (
      .clk      (clk),
      .cfg_clear(fab_clear[s]),
      .cfg_mode (fab_mode[s]),
      .cfg_valid(bl_rsp_valid && fab_mode[s]),
      .cfg_data (bl_rsp_data),
      .cfg_done (fab_done[s]),
      .op_in    (op_in),
      .op_out   (fab_out[s])
    );
  end

  // Handshake rules.
  a_opcode: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid |-> iss_instr.opcode == OPC_CUSTOM3);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid && !iss_ready |=> iss_valid && $stable(iss_instr));
  a_rsp_in_load: assert property (@(posedge clk) disable iff (!rst_n)
    bl_rsp_valid |-> state_q == ST_LOAD);

endmodule
