// dmem - data memory of one SecureD core ("Data Memory 1/2").
//
// Each core owns a private data memory, reached through the data-memory
// address bus (dmab) and data bus (dmdb). The bidirectional dmdb is split
// here into a write bus (dmdb_w) and a read bus (dmdb_r). Words are 32 bits
// and dmab counts words. Reads are combinational, writes take effect at the
// clock edge. A second port lets the system load input data and read results
// while the core is idle; it writes at the clock edge and reads
// combinationally like the core port. When both ports write in the same
// cycle only the core port's write is done.
//
// From the paper: one data memory per core, the bus names, no cache.
// Own choices: depth, word addressing, split data bus, timing, second port.
module dmem
  import secured_pkg::*;
#(
  parameter int unsigned DEPTH = 262144,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // core port
  input  logic [AW-1:0] dmab,
  input  logic          dm_we,
  input  word_t         dmdb_w,
  output word_t         dmdb_r,
  // load / inspect port
  input  logic [AW-1:0] ld_addr,
  input  logic          ld_we,
  input  word_t         ld_wdata,
  output word_t         ld_rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (dm_we)
      mem[dmab] <= dmdb_w;
    else if (ld_we)
      mem[ld_addr] <= ld_wdata;
  end

  assign dmdb_r   = mem[dmab];
  assign ld_rdata = mem[ld_addr];

endmodule
