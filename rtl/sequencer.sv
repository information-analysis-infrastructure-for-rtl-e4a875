// sequencer: elementary logic associative processor of the multiprocessor.
//
// Holds an N x W associative A-matrix, four W-bit vector registers m_a..m_d,
// a command memory CM of CM_DEPTH instruction words, a control automaton CU,
// the logical processor LP and three process-model engines (feasible-solution
// search, diagnosis, coverage). The interface I gives the outside a word port
// onto the A-matrix and the registers, a write port onto CM, and the m_d
// register to the eight neighbours (neighbours' m_d come in on nbr_md).
//
// Operation: while idle, the owner loads CM and the data window (words 0..N-1
// are the rows of A, words N..N+3 are m_a..m_d). A start pulse clears the
// program counter and the row pointer and runs the program; the CU reads the
// instruction at pc combinationally and executes it:
//   LP, QUAL, DECIDE, SETROW, RECV, NOP  one clock each
//   SEARCH, COVER                         N+2 clocks (issue, N rows, return)
//   DIAG                                  N+3 clocks (one more for m_d)
//   HALT                                  stops; done pulses and busy falls
// Register-matrix operations use the row A_i at the row pointer. QUAL writes
// the compacted quality vector (its 1 count is the score) or, with imm[0] = 1,
// the quality vector itself, whose 1s mark the poorly matching coordinates.
// Some outputs of the shared units are left unconnected on purpose: the three
// parts of the quality vector (only their OR is stored), the compactor's count
// and the decision bit (the chosen vector is stored, not the choice), and the
// coverage engine's busy (the engine's fixed length is tracked by the CU).
// rst_n also gates the program-counter assertion, so lint reports it as used
// both asynchronously and synchronously; the logic itself only resets
// asynchronously.
// The parts (LP, A, m_a..m_d, CM, CU, I), the operations and the process
// models follow the paper; the instruction set, its encoding, the row pointer
// and the data-window layout are this design's own.
module sequencer
  import lamp_pkg::*;
#(
  parameter int unsigned N        = 16,   // rows of A
  parameter int unsigned W        = 16,   // vector width
  parameter int unsigned CM_DEPTH = 32    // instructions in CM
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command memory load
  input  logic                          cm_we,
  input  logic [$clog2(CM_DEPTH)-1:0]   cm_addr,
  input  instr_t                        cm_wdata,
  // data window
  input  logic                          io_we,
  input  logic [$clog2(N+4)-1:0]        io_addr,
  input  logic [W-1:0]                  io_wdata,
  output logic [W-1:0]                  io_rdata,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // neighbour links
  input  logic [7:0][W-1:0]             nbr_md,
  output logic [W-1:0]                  md_out
);
  localparam int unsigned RW = $clog2(N);
  localparam int unsigned PW = $clog2(CM_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_WAIT} state_e;

  instr_t          cm [CM_DEPTH];
  logic [W-1:0]    amat [N];
  logic [W-1:0]    ma, mb, mc, md;
  logic [PW-1:0]   pc;
  logic [RW-1:0]   rp;
  state_e          state;
  instr_t          ir;
  logic [W-1:0]    a_row;

  // engine wiring
  logic [RW-1:0]   fs_idx, dg_idx, cv_idx;
  logic            fs_busy, fs_done, fs_we, dg_busy, dg_done, cv_busy, cv_done;
  logic [W-1:0]    fs_wdata, fs_ma, dg_mb, dg_mc, dg_md, cv_mb;
  logic [N-1:0]    cv_ma;
  logic            fs_start, dg_start, cv_start;

  // LP, quality and decision
  logic [W-1:0]    lp_res, q_opa, q_opb, q_d, q_mu1, q_mu2, q_vec, q_cmp, dec_q;
  logic [$clog2(W+1)-1:0] unused_cnt;
  logic            dec_y;

  assign ir     = (state == S_EXEC) ? cm[pc] : instr_t'('0);
  assign a_row  = amat[rp];
  assign md_out = md;

  logic_processor #(.W(W)) u_lp (
    .bop(ir.bop), .uop(ir.uop), .srca(ir.srca), .srcb(ir.srcb),
    .a_row(a_row), .ma(ma), .mb(mb), .mc(mc), .md(md), .result(lp_res));

  // QUAL and DECIDE read their two operands straight from the operand set.
  always_comb begin
    case (ir.srca)
      SEL_A: q_opa = a_row;  SEL_MA: q_opa = ma;  SEL_MB: q_opa = mb;
      SEL_MC: q_opa = mc;    default: q_opa = md;
    endcase
    case (ir.srcb)
      SEL_A: q_opb = a_row;  SEL_MA: q_opb = ma;  SEL_MB: q_opb = mb;
      SEL_MC: q_opb = mc;    default: q_opb = md;
    endcase
  end

  quality_unit #(.W(W)) u_q (.m(q_opa), .a(q_opb), .d(q_d), .mu_ma(q_mu1),
                             .mu_am(q_mu2), .q(q_vec));
  ones_compactor #(.W(W)) u_qc (.din(q_vec), .dout(q_cmp), .count(unused_cnt));
  decision_unit #(.W(W)) u_dec (.q1(q_opa), .q2(q_opb), .y(dec_y), .q(dec_q));

  // process-model engines share the A read port through the row pointer
  logic [RW-1:0] eng_idx;
  always_comb begin
    if (fs_busy)      eng_idx = fs_idx;
    else if (dg_busy) eng_idx = dg_idx;
    else              eng_idx = cv_idx;
  end
  logic [W-1:0] eng_row;
  assign eng_row = amat[eng_idx];

  assign fs_start = (state == S_EXEC) && (ir.op == OP_SEARCH);
  assign dg_start = (state == S_EXEC) && (ir.op == OP_DIAG);
  assign cv_start = (state == S_EXEC) && (ir.op == OP_COVER);

  feasible_search #(.N(N), .W(W)) u_fs (
    .clk, .rst_n, .start(fs_start), .modify(ir.imm[0]), .mb(mb),
    .row_idx(fs_idx), .row(eng_row), .a_we(fs_we), .a_wdata(fs_wdata),
    .busy(fs_busy), .done(fs_done), .ma(fs_ma));
  diagnosis_unit #(.N(N), .W(W)) u_dg (
    .clk, .rst_n, .start(dg_start), .multiple(ir.imm[0]), .ma(ma),
    .row_idx(dg_idx), .row(eng_row), .busy(dg_busy), .done(dg_done),
    .mb(dg_mb), .mc(dg_mc), .md(dg_md));
  coverage_unit #(.N(N), .W(W)) u_cv (
    .clk, .rst_n, .start(cv_start), .row_idx(cv_idx), .row(eng_row),
    .busy(cv_busy), .done(cv_done), .ma(cv_ma), .mb(cv_mb));

  // data window read
  always_comb begin
    if (io_addr < ($clog2(N+4))'(N)) io_rdata = amat[io_addr[RW-1:0]];
    else begin
      case (io_addr - ($clog2(N+4))'(N))
        ($clog2(N+4))'(WIN_MA): io_rdata = ma;
        ($clog2(N+4))'(WIN_MB): io_rdata = mb;
        ($clog2(N+4))'(WIN_MC): io_rdata = mc;
        default:                io_rdata = md;
      endcase
    end
  end

  // result of a one-cycle instruction
  logic [W-1:0] res;
  logic         res_we;
  always_comb begin
    res = lp_res; res_we = 1'b0;
    case (ir.op)
      OP_LP:     begin res = lp_res;            res_we = 1'b1; end
      OP_QUAL:   begin res = ir.imm[0] ? q_vec : q_cmp; res_we = 1'b1; end
      OP_DECIDE: begin res = dec_q;             res_we = 1'b1; end
      OP_RECV:   begin res = nbr_md[ir.imm[2:0]]; res_we = 1'b1; end
      default:   ;
    endcase
  end

  // CM write port (only while idle)
  always_ff @(posedge clk) begin
    if (cm_we && state == S_IDLE) cm[cm_addr] <= cm_wdata;
  end

  // A-matrix: window writes while idle, LP results to A_i, search write-back
  always_ff @(posedge clk) begin
    if (state == S_IDLE && io_we && io_addr < ($clog2(N+4))'(N))
      amat[io_addr[RW-1:0]] <= io_wdata;
    else if (state == S_EXEC && res_we && ir.dst == SEL_A)
      amat[rp] <= res;
    else if (fs_we)
      amat[fs_idx] <= fs_wdata;
  end

  // control automaton
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; rp <= '0; busy <= 1'b0; done <= 1'b0;
      ma <= '0; mb <= '0; mc <= '0; md <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (io_we && io_addr >= ($clog2(N+4))'(N)) begin
            case (io_addr - ($clog2(N+4))'(N))
              ($clog2(N+4))'(WIN_MA): ma <= io_wdata;
              ($clog2(N+4))'(WIN_MB): mb <= io_wdata;
              ($clog2(N+4))'(WIN_MC): mc <= io_wdata;
              default:                md <= io_wdata;
            endcase
          end
          if (start) begin
            state <= S_EXEC; pc <= '0; rp <= '0; busy <= 1'b1;
          end
        end
        S_EXEC: begin
          if (res_we) begin
            case (ir.dst)
              SEL_MA: ma <= res;
              SEL_MB: mb <= res;
              SEL_MC: mc <= res;
              SEL_MD: md <= res;
              default: ;
            endcase
          end
          case (ir.op)
            OP_HALT:   begin state <= S_IDLE; busy <= 1'b0; done <= 1'b1; end
            OP_SETROW: begin rp <= ir.imm[RW-1:0]; pc <= pc + 1'b1; end
            OP_SEARCH, OP_DIAG, OP_COVER: state <= S_WAIT;
            default:   pc <= pc + 1'b1;
          endcase
        end
        S_WAIT: begin
          if (fs_done) begin ma <= fs_ma; state <= S_EXEC; pc <= pc + 1'b1; end
          if (dg_done) begin
            mb <= dg_mb; mc <= dg_mc; md <= dg_md; state <= S_EXEC; pc <= pc + 1'b1;
          end
          if (cv_done) begin
            ma <= W'(cv_ma); mb <= cv_mb; state <= S_EXEC; pc <= pc + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // program counter must stay inside CM
  a_pc_range: assert property (@(posedge clk) disable iff (!rst_n)
                               state == S_EXEC |-> pc < PW'(CM_DEPTH - 1) || ir.op == OP_HALT);
endmodule
