// compact_reg: register for left shifting and compacting of 1s.
//
// On a clock edge with load=1 the register takes din; with compact=1 it takes
// its own value with all 1s moved to the left end, in a single clock (the
// paper's claim for this register). count gives, combinationally from the
// register, the position of the rightmost 1 counted from 1 at the left, which
// is the number of 1s and serves as the quality index of the vector. rst_n is
// an asynchronous clear, matching the R inputs of the register cells.
// Function, single-cycle timing and the clear follow the paper; the
// compaction network (see ones_compactor) and the load/compact controls are
// this design's own. The output selector (14) and decoder (15) printed in the
// paper's drawing are not modelled beyond count, as their role is not stated.
module compact_reg #(
  parameter int unsigned W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic                   compact,
  input  logic [W-1:0]           din,
  output logic [W-1:0]           q,
  output logic [$clog2(W+1)-1:0] count
);
  logic [W-1:0] packed_q;
  logic [$clog2(W+1)-1:0] unused_cnt;

  ones_compactor #(.W(W)) u_cmp (.din(q), .dout(packed_q), .count(unused_cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (load)    q <= din;
    else if (compact) q <= packed_q;
  end

  // The index of the rightmost 1 of the register itself (after compaction it
  // equals the number of 1s).
  always_comb begin
    count = '0;
    for (int j = 0; j < W; j++)
      if (q[j] && ((j == 0) || !q[j-1])) count = ($clog2(W+1))'(W - j);
  end
endmodule
