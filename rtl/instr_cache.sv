// instr_cache: quantum instruction cache of the QuMA core.
//
// Holds the program, a mix of auxiliary classical instructions and QuMIS
// microinstructions, which the host uploads before execution. It is a simple
// DEPTH x 32-bit memory with one write port (host upload) and one synchronous read port
// (instruction fetch): the word at rd_addr appears on rd_data one clock later.
// The paper names the cache but gives neither its size nor its organisation; a
// directly addressed memory that is filled completely by the host (no misses, no tags)
// is this design's choice, and DEPTH=1024 holds the 299-instruction AllXY program.
module instr_cache #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
