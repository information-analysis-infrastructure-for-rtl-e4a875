// data_memory: global data store of the multiprocessor.
//
// DEPTH words of W bits with one synchronous write port and one combinational
// read port at the same address. The default depth holds one window of N+4
// words for each of 16 sequencers: the N rows of its A-matrix followed by its
// m_a, m_b, m_c and m_d. The paper names this memory; depth, layout and ports
// are this design's own.
module data_memory #(
  parameter int unsigned DEPTH = 16 * (16 + 4),
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
  end

  assign rdata = mem[addr];
endmodule
