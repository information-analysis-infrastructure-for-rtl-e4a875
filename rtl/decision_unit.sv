// decision_unit: picks the better of two compacted quality vectors.
//
// Implements the paper's decision rule (4): Y = OR over bits of
// ((Q1 and Q2) xor Q1). Y = 0 means every 1 of Q1 is also a 1 of Q2, i.e. for
// left-compacted vectors Q1 has no more 1s than Q2 and is at least as good, so
// the result is Q1; otherwise the result is Q2. Purely combinational. The
// and / xor / or-reduce structure is the paper's; the select output is named
// here.
module decision_unit #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] q1,
  input  logic [W-1:0] q2,
  output logic         y,     // 0: q1 chosen, 1: q2 chosen
  output logic [W-1:0] q
);
  always_comb begin
    y = |((q1 & q2) ^ q1);
    q = y ? q2 : q1;
  end
endmodule
