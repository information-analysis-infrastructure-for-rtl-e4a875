// command_memory: global program store of the multiprocessor.
//
// DEPTH instruction words (lamp_pkg::instr_t) with one synchronous write port
// and one combinational read port. The host fills it through the interface;
// the control block reads it to load the program into every sequencer's own
// command memory. The paper names this memory; depth, word format and port
// structure are this design's own.
module command_memory
  import lamp_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
