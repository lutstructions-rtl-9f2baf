// Shared types and constants of the reconfigurable-instruction unit.
//
// The unit executes RISC-V R-type instructions on the custom-3 major opcode
// (7'b1111011). funct7 is the reconfiguration index: it selects one of 128
// bitstreams stored back to back in memory from a library base address.
// funct3 is handed to the fabric as an extra operand so that one bitstream
// may hold up to eight related instructions.
//
// fabric_latency() gives the operating-mode latency of a fabric of Y columns
// with a compulsory register after every S-th column and after the last one:
// ceil(Y/S) cycles (32/7 -> 5, the unit's default).
package lut_pkg;

  localparam logic [6:0] OPC_CUSTOM3 = 7'b1111011;

  // R-type instruction word, bit positions as in the RISC-V base ISA.
  typedef struct packed {
    logic [6:0] funct7;   // [31:25] reconfiguration index
    logic [4:0] rs2;      // [24:20]
    logic [4:0] rs1;      // [19:15]
    logic [2:0] funct3;   // [14:12] extra fabric operand
    logic [4:0] rd;       // [11:7]
    logic [6:0] opcode;   // [6:0]
  } rtype_t;

  // Configuration bits of one LUT4_4 (16 entries x 4 outputs) and so the
  // bitstream size of a W x Y fabric in bytes: W*Y*64/8 (8 KiB for 32x32).
  localparam int unsigned LUT_CFG_BITS = 64;

  function automatic int unsigned bitstream_bytes(int unsigned w, int unsigned y);
    return w * y * LUT_CFG_BITS / 8;
  endfunction

  function automatic int unsigned fabric_latency(int unsigned y, int unsigned s);
    return (y + s - 1) / s;
  endfunction

  // Column c (0-based) ends with a register in operating mode.
  function automatic bit col_registered(int unsigned c, int unsigned y, int unsigned s);
    return (((c + 1) % s) == 0) || (c == y - 1);
  endfunction

endpackage
