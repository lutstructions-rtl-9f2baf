// One reconfigurable fabric: a W-row by Y-column mesh of LUT4_4 cells.
//
// Data moves only from left to right. Between two columns, row r's LUT
// inputs are: in1/in2 from the same row (straight wires), in0 from out3 of
// row r-1 and in3 from out0 of row r+1 (the diagonals). At the top and
// bottom edges the diagonal that has no neighbour runs straight instead
// (row 0: in0 <- out0, row W-1: in3 <- out3). Wire j of row r is bit 4r+j
// of every 4W-bit column vector.
//
// Operands enter column 0 on op_in (4W bits); the result is out1 of every
// row of the last column (op_out, W bits). There is a register after every
// column. In operating mode (cfg_mode=0) the register is used only after
// every S-th column and after the last column; the others are bypassed by
// a multiplexer, so the fabric is a fixed pipeline of LATENCY = ceil(Y/S)
// cycles: op_out in cycle t+LATENCY belongs to op_in of cycle t.
//
// Configuration (cfg_mode=1) reuses the logic wires. cfg_clear (one cycle,
// before the first word) loads every LUT with the identity table, so all
// columns pass their inputs straight to their outputs. The fabric is cut
// into P segments of YS = Y/P columns; in configuration mode every segment's
// first column takes its own 4W-bit slice of cfg_data instead of the
// previous column's output, and every column register is used. Each
// segment receives 16*YS words: word k is for column YS-1-(k/16) of the
// segment (rightmost first) and is stored as table entry k%16 of each LUT
// of that column, all LUTs of the column at once. A (valid, word index) tag
// travels beside the data through the same register stages, so a column
// writes exactly when its word reaches it, and gaps in cfg_valid are
// allowed. cfg_done pulses in the cycle the last word is accepted: P=16
// and Y=32 give 32 words, i.e. a 32-cycle reconfiguration.
//
// Because a wire passes through an identity LUT and then a diagonal, a
// configuration bit that enters row r on in0 sits on row r-1's in3 one
// column later, and back on row r's in0 two columns later. The bitstream
// therefore swaps those bit pairs for columns at an odd distance from their
// segment's first column; P must leave YS even (P a power of two up to Y/2).
//
// From the paper: the LUT4_4 mesh with straight and diagonal wires, no
// registers inside the logic, a register every S columns with the others
// bypassed, identity-table bypass mode for configuration, rightmost column
// programmed first, P parallel segments with a 4W-bit input each, and the
// odd-column bit swap. This design's own choices: the tag that travels with
// the configuration, the word and entry order, the register after the last
// column, and the straight edge wires.
module lut_fabric #(
  parameter int unsigned W = 32,   // rows, operand width
  parameter int unsigned Y = 32,   // columns, fabric length
  parameter int unsigned S = 7,    // register placement
  parameter int unsigned P = 16    // configuration parallelism
) (
  input  logic                 clk,
  input  logic                 cfg_clear,
  input  logic                 cfg_mode,
  input  logic                 cfg_valid,
  input  logic [4*W*P-1:0]     cfg_data,
  output logic                 cfg_done,
  input  logic [4*W-1:0]       op_in,
  output logic [W-1:0]         op_out
);
  import lut_pkg::*;

  localparam int unsigned YS      = Y / P;           // columns per segment
  localparam int unsigned NWORDS  = 16 * YS;         // words per segment
  localparam int unsigned KW      = $clog2(NWORDS);

  // Parameter rules from the text: P a power of two, at most Y/2.
  initial begin
    assert (P >= 1 && (P & (P - 1)) == 0 && P <= Y / 2 && Y % P == 0)
      else $error("lut_fabric: P=%0d must be a power of two up to Y/2", P);
    assert (S >= 1 && S <= Y) else $error("lut_fabric: S=%0d out of range", S);
  end

  // ---------------------------------------------------------------------
  // Configuration word counter and the tag pipeline (one per segment
  // column offset, shared by all segments since they run in lockstep).
  // ---------------------------------------------------------------------
  logic [KW-1:0] widx_q;
  logic          tag_v [YS];
  logic [KW-1:0] tag_k [YS];

  always_ff @(posedge clk) begin
    if (cfg_clear)                   widx_q <= '0;
    else if (cfg_mode && cfg_valid)  widx_q <= widx_q + 1'b1;
  end

  assign cfg_done = cfg_mode && cfg_valid && (widx_q == KW'(NWORDS - 1));

  assign tag_v[0] = cfg_mode && cfg_valid;
  assign tag_k[0] = widx_q;

  for (genvar d = 1; d < YS; d++) begin : g_tag
    always_ff @(posedge clk) begin
      if (cfg_clear) tag_v[d] <= 1'b0;
      else           tag_v[d] <= tag_v[d-1] && cfg_mode;
      tag_k[d] <= tag_k[d-1];
    end
  end

  // ---------------------------------------------------------------------
  // Columns
  // ---------------------------------------------------------------------
  for (genvar c = 0; c < Y; c++) begin : g_col
    localparam int unsigned D   = c % YS;     // offset inside the segment
    localparam int unsigned SEG = c / YS;
    localparam bit          REG = col_registered(c, Y, S);

    logic [4*W-1:0] cin;    // LUT inputs
    logic [4*W-1:0] lout;   // LUT outputs
    logic [4*W-1:0] ic;     // after the inter-column wires
    logic [4*W-1:0] rq;     // column register
    logic [4*W-1:0] cout;   // to the next column
    logic           we;
    logic [3:0]     entry;

    // Input selection: segment heads inject configuration data.
    if (c == 0) begin : g_in0
      assign cin = cfg_mode ? cfg_data[0 +: 4*W] : op_in;
    end else if (D == 0) begin : g_inseg
      assign cin = cfg_mode ? cfg_data[SEG*4*W +: 4*W] : g_col[c-1].cout;
    end else begin : g_inmid
      assign cin = g_col[c-1].cout;
    end

    assign we    = tag_v[D] && (tag_k[D] / 16 == KW'(YS - 1 - D));
    assign entry = tag_k[D][3:0];

    for (genvar r = 0; r < W; r++) begin : g_row
      lut4_4 u_lut (
        .clk      (clk),
        .cfg_clear(cfg_clear),
        .cfg_we   (we),
        .cfg_entry(entry),
        .in       (cin[4*r +: 4]),
        .out      (lout[4*r +: 4])
      );
      // Straight wires.
      assign ic[4*r+1] = lout[4*r+1];
      assign ic[4*r+2] = lout[4*r+2];
      // Diagonals: in0 from the row above's out3, in3 from the row below's out0.
      if (r == 0) begin : g_top
        assign ic[4*r+0] = lout[4*r+0];
      end else begin : g_dn
        assign ic[4*r+0] = lout[4*(r-1)+3];
      end
      if (r == W - 1) begin : g_bot
        assign ic[4*r+3] = lout[4*r+3];
      end else begin : g_up
        assign ic[4*r+3] = lout[4*(r+1)+0];
      end
    end

    always_ff @(posedge clk) rq <= ic;

    if (REG) begin : g_reg
      assign cout = rq;
    end else begin : g_byp
      assign cout = cfg_mode ? rq : ic;
    end
  end

  for (genvar r = 0; r < W; r++) begin : g_out
    assign op_out[r] = g_col[Y-1].cout[4*r+1];
  end

endmodule
