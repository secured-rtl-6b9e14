// imem - instruction memory of one SecureD core ("Instruction Memory 1/2").
//
// Each core owns a private instruction memory, reached through the
// instruction-memory address bus (imab) and data bus (imdb). The word is one
// 64-bit PISA instruction and imab counts instructions, not bytes. The read
// is combinational, which suits a core without cache that fetches one
// instruction per cycle. A second, write-only port loads the instrumented
// program before the core leaves reset ("setup memories").
//
// From the paper: one instruction memory per core, the bus names, no cache.
// Own choices: depth, word addressing, combinational read, load port.
module imem
  import secured_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // core fetch port
  input  logic [AW-1:0] imab,
  output instr_t        imdb,
  // program load port
  input  logic          ld_we,
  input  logic [AW-1:0] ld_addr,
  input  instr_t        ld_data
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_we) mem[ld_addr] <= ld_data;
  end

  assign imdb = mem[imab];

endmodule
