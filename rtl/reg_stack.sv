// reg_stack - hardware stack holding the saved context of one SecureD core.
//
// When the CONTROLLER switches a core to balancing or to an interrupt
// routine, it pushes the core's 37 registers here one at a time and pops
// them in reverse order to restore them. The stack is a last-in first-out
// array of DEPTH words; the top word is readable combinationally (rdata),
// push and pop act at the clock edge, and a push and a pop in the same cycle
// replace the top word. A push to a full stack or a pop of an empty one is
// refused and sets the sticky error flag (secured_top asserts that the
// CONTROLLER never causes one).
//
// From the paper: the saved register set and that it goes to a stack beside
// the CONTROLLER (Fig. 3 draws one stack per core). Own choices: a dedicated
// register array rather than the core's data memory, and room for two
// contexts (FRAMES), the deepest nesting the CONTROLLER produces: CORE2's
// own program plus an interrupt taken during balancing.
module reg_stack
  import secured_pkg::*;
#(
  parameter int unsigned FRAMES = 2,
  parameter int unsigned DEPTH  = NSAVE * FRAMES,
  parameter int unsigned PW     = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic          pop,
  input  word_t         wdata,
  output word_t         rdata,     // word on top of the stack
  output logic [PW-1:0] count,
  output logic          empty,
  output logic          full,
  output logic          err        // sticky: overflow or underflow seen
);

  word_t         mem [DEPTH];
  logic [PW-1:0] sp;               // number of words held

  assign empty = (sp == '0);
  assign full  = (sp == PW'(DEPTH));
  assign count = sp;
  assign rdata = empty ? '0 : mem[sp - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp  <= '0;
      err <= 1'b0;
    end else begin
      if (push && pop) begin
        if (empty) err <= 1'b1;
      end else if (push) begin
        if (full) err <= 1'b1;
        else      sp  <= sp + 1'b1;
      end else if (pop) begin
        if (empty) err <= 1'b1;
        else       sp  <= sp - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push && pop && !empty) mem[sp - 1'b1] <= wdata;
    else if (push && !pop && !full) mem[sp[PW-1:0]] <= wdata;
  end

endmodule
