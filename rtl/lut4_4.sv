// LUT4_4: a look-up table with four inputs and four outputs.
//
// It is four LUT4s that share their inputs: a 16-entry table of 4-bit words,
// addressed by {in[3],in[2],in[1],in[0]}, drives out[3:0]. The table has no
// dedicated configuration port. While the fabric is being programmed the
// four logic inputs carry configuration data, and cfg_we stores the current
// input word into entry cfg_entry at the clock edge. cfg_clear loads the
// identity table (entry e holds e), which is the bypass mode out_i <- in_i
// used to pass configuration through unprogrammed columns.
//
// Timing: out is combinational from in; table writes take effect after the
// clock edge. cfg_clear has priority over cfg_we.
//
// Follows the paper: 4 inputs, 4 outputs, 16x4 truth table, identity table
// as bypass mode. Design choices: entry-per-cycle write from the logic inputs,
// and a synchronous clear to the identity table.
module lut4_4 (
  input  logic       clk,
  input  logic       cfg_clear,
  input  logic       cfg_we,
  input  logic [3:0] cfg_entry,
  input  logic [3:0] in,
  output logic [3:0] out
);

  logic [3:0] table_q [16];

  always_ff @(posedge clk) begin
    if (cfg_clear) begin
      for (int e = 0; e < 16; e++) table_q[e] <= 4'(e);
    end else if (cfg_we) begin
      table_q[cfg_entry] <= in;
    end
  end

  assign out = table_q[in];

endmodule
