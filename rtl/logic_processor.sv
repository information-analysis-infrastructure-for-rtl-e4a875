// logic_processor: the LP of a sequencer, one vector operation per clock.
//
// Two operand multiplexers choose among the row A_i and the registers m_a..m_d.
// The first level applies one binary operator (and, or, xor) to the two
// operands, or nop, which passes the first operand on. The second level
// applies one unary operator (not, nop, or slc: shift left with compaction of
// the 1s) to that result. The result is returned combinationally; the caller
// writes it to the destination register, which is how the paper's output
// multiplexer feeds the result back into one of the operands. Operands,
// operators and the two-level order follow the paper; the encodings come from
// lamp_pkg.
module logic_processor
  import lamp_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  bop_e         bop,
  input  uop_e         uop,
  input  sel_e         srca,
  input  sel_e         srcb,
  input  logic [W-1:0] a_row,
  input  logic [W-1:0] ma,
  input  logic [W-1:0] mb,
  input  logic [W-1:0] mc,
  input  logic [W-1:0] md,
  output logic [W-1:0] result
);
  logic [W-1:0] opa, opb, lvl1, compacted;
  logic [$clog2(W+1)-1:0] unused_cnt;

  function automatic logic [W-1:0] pick(sel_e s, logic [W-1:0] a_i, logic [W-1:0] r_a,
                                        logic [W-1:0] r_b, logic [W-1:0] r_c,
                                        logic [W-1:0] r_d);
    case (s)
      SEL_A:   return a_i;
      SEL_MA:  return r_a;
      SEL_MB:  return r_b;
      SEL_MC:  return r_c;
      SEL_MD:  return r_d;
      default: return '0;
    endcase
  endfunction

  always_comb begin
    opa = pick(srca, a_row, ma, mb, mc, md);
    opb = pick(srcb, a_row, ma, mb, mc, md);
    case (bop)
      BOP_AND: lvl1 = opa & opb;
      BOP_OR:  lvl1 = opa | opb;
      BOP_XOR: lvl1 = opa ^ opb;
      default: lvl1 = opa;
    endcase
  end

  ones_compactor #(.W(W)) u_slc (.din(lvl1), .dout(compacted), .count(unused_cnt));

  always_comb begin
    case (uop)
      UOP_NOT: result = ~lvl1;
      UOP_SLC: result = compacted;
      default: result = lvl1;
    endcase
  end
endmodule
