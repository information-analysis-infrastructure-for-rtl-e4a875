// tb_sequencer: loads programs and random data into one sequencer, runs them
// and compares the whole data window with the reference model; checks the
// clock count of every program against the per-instruction lengths.
module tb_sequencer;
  import lamp_pkg::*;
  import lamp_ref_pkg::*;
  localparam int N = 16, W = 16, D = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cm_we, io_we, start, busy, done;
  logic [4:0] cm_addr, io_addr;
  instr_t cm_wdata;
  logic [W-1:0] io_wdata, io_rdata, md_out;
  logic [7:0][W-1:0] nbr_md;

  sequencer dut (.clk, .rst_n, .cm_we, .cm_addr, .cm_wdata, .io_we, .io_addr, .io_wdata,
                 .io_rdata, .start, .busy, .done, .nbr_md, .md_out);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  instr_t prog [$];

  task automatic run_and_check(string name);
    seq_state_t s;
    logic [W-1:0] nb [8];
    int exp_cyc = 0, cyc = 0;
    for (int k = 0; k < 8; k++) begin nbr_md[k] = 16'($urandom); nb[k] = nbr_md[k]; end
    for (int r = 0; r < N; r++) s.a[r] = 16'($urandom) | 16'($urandom);
    s.ma = 16'($urandom); s.mb = 16'($urandom) & 16'($urandom); s.mc = 16'($urandom);
    s.md = 16'($urandom); s.rp = 0;
    // load program and window
    foreach (prog[k]) begin
      @(negedge clk); cm_we = 1; cm_addr = 5'(k); cm_wdata = prog[k];
    end
    @(negedge clk); cm_we = 0;
    for (int w = 0; w < N + 4; w++) begin
      @(negedge clk); io_we = 1; io_addr = 5'(w);
      io_wdata = (w < N) ? s.a[w] : (w == N) ? s.ma : (w == N+1) ? s.mb : (w == N+2) ? s.mc : s.md;
    end
    @(negedge clk); io_we = 0;
    // model
    foreach (prog[k]) begin
      exp_cyc += ref_step(s, prog[k], nb);
      if (prog[k].op == OP_HALT) break;
    end
    // run
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); cyc++; #1; end
    check({name, " cycles"}, cyc, exp_cyc);
    check({name, " busy low"}, int'(busy), 0);
    for (int w = 0; w < N + 4; w++) begin
      logic [W-1:0] e;
      io_addr = 5'(w); #1;
      e = (w < N) ? s.a[w] : (w == N) ? s.ma : (w == N+1) ? s.mb : (w == N+2) ? s.mc : s.md;
      check($sformatf("%s word %0d", name, w), int'(io_rdata), int'(e));
    end
    check({name, " md to neighbours"}, int'(md_out), int'(s.md));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cm_we = 0; io_we = 0; start = 0; cm_addr = '0; io_addr = '0; cm_wdata = '0;
    io_wdata = '0; nbr_md = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1: halt only
    prog = '{mk_instr(OP_HALT)};
    run_and_check("halt");
    // 2: every LP operator, register-matrix and register-register forms
    prog = '{mk_instr(OP_SETROW, .imm(5)),
             mk_instr(OP_LP, BOP_AND, UOP_NOP, SEL_MB, SEL_A,  SEL_MC),
             mk_instr(OP_LP, BOP_XOR, UOP_NOT, SEL_MA, SEL_MB, SEL_MD),
             mk_instr(OP_LP, BOP_NOP, UOP_SLC, SEL_MA, SEL_MA, SEL_MB),
             mk_instr(OP_SETROW, .imm(2)),
             mk_instr(OP_LP, BOP_OR,  UOP_NOP, SEL_MA, SEL_MD, SEL_A),
             mk_instr(OP_LP, BOP_OR,  UOP_SLC, SEL_A,  SEL_MC, SEL_MA),
             mk_instr(OP_NOP),
             mk_instr(OP_HALT)};
    run_and_check("lp");
    // 3: quality and decision
    prog = '{mk_instr(OP_SETROW, .imm(7)),
             mk_instr(OP_QUAL, .srca(SEL_MA), .srcb(SEL_A), .dst(SEL_MC)),
             mk_instr(OP_SETROW, .imm(8)),
             mk_instr(OP_QUAL, .srca(SEL_MA), .srcb(SEL_A), .dst(SEL_MD)),
             mk_instr(OP_DECIDE, .srca(SEL_MC), .srcb(SEL_MD), .dst(SEL_MB)),
             mk_instr(OP_QUAL, .srca(SEL_MB), .srcb(SEL_A), .dst(SEL_MA), .imm(1)),
             mk_instr(OP_HALT)};
    run_and_check("qual");
    // 4: process models
    prog = '{mk_instr(OP_SEARCH, .imm(0)), mk_instr(OP_HALT)};
    run_and_check("search");
    prog = '{mk_instr(OP_SEARCH, .imm(1)), mk_instr(OP_HALT)};
    run_and_check("search+modify");
    prog = '{mk_instr(OP_DIAG, .imm(0)), mk_instr(OP_HALT)};
    run_and_check("diag single");
    prog = '{mk_instr(OP_DIAG, .imm(1)), mk_instr(OP_HALT)};
    run_and_check("diag multiple");
    prog = '{mk_instr(OP_COVER), mk_instr(OP_HALT)};
    run_and_check("cover");
    // 5: neighbour exchange and a mixed program
    prog = '{mk_instr(OP_RECV, .imm(0), .dst(SEL_MA)), mk_instr(OP_RECV, .imm(5), .dst(SEL_MB)),
             mk_instr(OP_RECV, .imm(7), .dst(SEL_MC)), mk_instr(OP_HALT)};
    run_and_check("recv");
    prog = '{mk_instr(OP_SEARCH, .imm(0)), mk_instr(OP_DIAG, .imm(0)),
             mk_instr(OP_COVER), mk_instr(OP_LP, BOP_AND, UOP_NOT, SEL_MB, SEL_MD, SEL_MD),
             mk_instr(OP_SEARCH, .imm(1)), mk_instr(OP_HALT)};
    for (int t = 0; t < 5; t++) run_and_check("mixed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
