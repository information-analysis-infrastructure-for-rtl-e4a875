// ones_compactor: combinational core of the shift-left compacting register.
//
// Moves every 1 of the input vector to the left (most significant) end, so
// that a vector holding k ones becomes k ones followed by zeros, and reports
// the position (counted from 1 at the left) of the rightmost 1 of the result,
// which equals k. The paper asks for this to be done with logic only, without
// addition. Here it is an odd-even transposition network of W stages whose
// compare-exchange cell is an OR gate (left output) and an AND gate (right
// output); the position is taken by a one-hot edge detector and an OR encoder.
// The network is this design's choice: the paper's Fig. 2 gives the function
// but its cell-level gates cannot be read from it reliably.
module ones_compactor #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0]         din,
  output logic [W-1:0]         dout,
  output logic [$clog2(W+1)-1:0] count   // position of rightmost 1 = number of 1s
);
  logic [W-1:0] stage [W+1];
  logic [W-1:0] edge_oh;   // edge_oh[j]: bit j is the rightmost 1

  always_comb begin
    stage[0] = din;
    for (int s = 0; s < W; s++) begin
      stage[s+1] = stage[s];
      for (int j = (s % 2); j + 1 < W; j += 2) begin
        // pair (j+1 = left, j = right): 1s move to the left
        stage[s+1][j+1] = stage[s][j+1] | stage[s][j];
        stage[s+1][j]   = stage[s][j+1] & stage[s][j];
      end
    end
    dout = stage[W];
  end

  always_comb begin
    for (int j = 0; j < W; j++)
      edge_oh[j] = dout[j] & ((j == 0) ? 1'b1 : ~dout[j-1]);
    count = '0;
    for (int j = 0; j < W; j++)
      if (edge_oh[j]) count = count | ($clog2(W+1))'(W - j);
  end
endmodule
