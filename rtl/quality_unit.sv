// quality_unit: vector-logical quality criterion of a query m against a row A.
//
// Computes the three component vectors of the paper's criterion (3) and their
// OR, all bitwise and combinational:
//   d      = m xor A                   code distance
//   mu_ma  = A and not(m and A)        non-membership of the result in A
//   mu_am  = m and not(m and A)        non-membership of the result in m
//   q      = d or mu_ma or mu_am       (which simplifies to m xor A)
// A 1 in q marks a coordinate where m and A interact badly; fewer 1s is better.
// The formulas are the paper's; the width W is this design's choice.
module quality_unit #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] m,
  input  logic [W-1:0] a,
  output logic [W-1:0] d,
  output logic [W-1:0] mu_ma,
  output logic [W-1:0] mu_am,
  output logic [W-1:0] q
);
  logic [W-1:0] both_n;

  always_comb begin
    both_n = ~(m & a);
    d      = m ^ a;
    mu_ma  = a & both_n;
    mu_am  = m & both_n;
    q      = d | mu_ma | mu_am;
  end
endmodule
