// lamp_ref_pkg: instruction-level reference model of one sequencer, used by
// the testbenches to predict results independently of the RTL. It works on a
// 16-row, 16-bit sequencer (the default size) and models each instruction
// from its definition: bitwise formulas, 1s counted with a loop, the process
// models as plain loops over the rows. It also gives each instruction's
// length in clocks.
package lamp_ref_pkg;
  import lamp_pkg::*;

  localparam int RN = 16;
  localparam int RW = 16;

  typedef struct {
    logic [RW-1:0] a [RN];
    logic [RW-1:0] ma, mb, mc, md;
    int            rp;
  } seq_state_t;

  function automatic logic [RW-1:0] ref_compact(logic [RW-1:0] v);
    logic [RW-1:0] r = '0;
    int k = 0;
    for (int i = 0; i < RW; i++) if (v[i]) k++;
    for (int i = 0; i < k; i++) r[RW-1-i] = 1'b1;
    return r;
  endfunction

  function automatic logic [RW-1:0] ref_opnd(seq_state_t s, sel_e sel);
    case (sel)
      SEL_A:   return s.a[s.rp];
      SEL_MA:  return s.ma;
      SEL_MB:  return s.mb;
      SEL_MC:  return s.mc;
      default: return s.md;
    endcase
  endfunction

  function automatic void ref_write(inout seq_state_t s, sel_e dst, logic [RW-1:0] v);
    case (dst)
      SEL_A:   s.a[s.rp] = v;
      SEL_MA:  s.ma = v;
      SEL_MB:  s.mb = v;
      SEL_MC:  s.mc = v;
      default: s.md = v;
    endcase
  endfunction

  // Executes one instruction; returns its length in clocks.
  function automatic int ref_step(inout seq_state_t s, input instr_t i,
                                  input logic [RW-1:0] nbr [8]);
    logic [RW-1:0] x, y, v, acc1, acc0, cov;
    x = ref_opnd(s, i.srca);
    y = ref_opnd(s, i.srcb);
    case (i.op)
      OP_LP: begin
        case (i.bop)
          BOP_AND: v = x & y;
          BOP_OR:  v = x | y;
          BOP_XOR: v = x ^ y;
          default: v = x;
        endcase
        if (i.uop == UOP_NOT) v = ~v;
        else if (i.uop == UOP_SLC) v = ref_compact(v);
        ref_write(s, i.dst, v);
        return 1;
      end
      OP_SETROW: begin s.rp = int'(i.imm) % RN; return 1; end
      OP_QUAL: begin
        // d | mu(m in A) | mu(A in m), each formed bit by bit
        for (int b = 0; b < RW; b++)
          v[b] = (x[b] ^ y[b]) | (y[b] & ~(x[b] & y[b])) | (x[b] & ~(x[b] & y[b]));
        ref_write(s, i.dst, i.imm[0] ? v : ref_compact(v));
        return 1;
      end
      OP_DECIDE: begin
        ref_write(s, i.dst, (|((x & y) ^ x)) ? y : x);
        return 1;
      end
      OP_SEARCH: begin
        v = '0;
        for (int r = 0; r < RN; r++) begin
          v[RN-1-r] = ((s.a[r] & s.mb) == s.mb);
          if (i.imm[0]) s.a[r] = s.a[r] & s.mb;
        end
        s.ma = v;
        return RN + 2;
      end
      OP_DIAG: begin
        acc1 = i.imm[0] ? '0 : '1;
        acc0 = '0;
        for (int r = 0; r < RN; r++)
          if (s.ma[RN-1-r]) acc1 = i.imm[0] ? (acc1 | s.a[r]) : (acc1 & s.a[r]);
          else acc0 = acc0 | s.a[r];
        s.mb = acc1; s.mc = acc0; s.md = acc1 & ~acc0;
        return RN + 3;
      end
      OP_COVER: begin
        cov = '0; v = '0;
        for (int r = 0; r < RN; r++) begin
          v[RN-1-r] = (s.a[r] & ~cov) != '0;
          cov = cov | s.a[r];
        end
        s.ma = v; s.mb = cov;
        return RN + 2;
      end
      OP_RECV: begin ref_write(s, i.dst, nbr[i.imm[2:0]]); return 1; end
      default: return 1;   // NOP, HALT
    endcase
  endfunction
endpackage
