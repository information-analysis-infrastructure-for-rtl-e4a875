// tb_lamp_top: end-to-end test of the multiprocessor at its default size
// (4x4 sequencers, 16 x 16-bit A-matrices, 32-word programs), driven only
// through the host bus.
//   Job 1: a 16-instruction program using every operation (all LP operators,
//          quality, decision, feasible search with and without write-back,
//          single and multiple diagnosis, coverage, neighbour exchange) on
//          random data. All 16 windows are compared with the reference model,
//          run in lock-step over the 16 sequencers; the RUN length is checked.
//   Job 2: the quality example (m = 110011001100, A = 000011110101 gives six
//          bad coordinates, better than a competitor with eight) and the
//          11 x 10 spare-coverage table (first five spares chosen).
//   Infra: the ten-fault memory is tested and repaired; a diagonal defect
//          pattern that needs eight spare columns is refused.
// Each mechanism is counted where the hardware does it; one that never
// happens counts as a failure.
module tb_lamp_top;
  import lamp_pkg::*;
  import lamp_ref_pkg::*;
  localparam int P = 16, N = 16, W = 16, R = 4, C = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr, job_done, mem_we, mem_wdata, mem_rdata, infra_done;
  logic [11:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] mem_row, mem_col;
  logic [12:0][14:0] fault_en, fault_val;

  lamp_top dut (.clk, .rst_n, .wr, .addr, .wdata, .rdata, .job_done, .mem_we, .mem_row,
                .mem_col, .mem_wdata, .mem_rdata, .fault_en, .fault_val, .infra_done);
  always #5 clk = ~clk;

  // ---- mechanism counters, observed in sequencer P[0][0] and the blocks ----
  int n_search, n_modify, n_diag_s, n_diag_m, n_cover, n_recv, n_qual, n_decide;
  int n_and, n_or, n_xor, n_bnop, n_not, n_slc, n_wr_a, n_jobs, n_rep_ok, n_rep_fail;
  always @(posedge clk) begin
    if (dut.u_mp.g_row[0].g_col[0].u_seq.state == 2'd1) begin
      automatic instr_t i = dut.u_mp.g_row[0].g_col[0].u_seq.ir;
      case (i.op)
        OP_SEARCH: begin n_search++; if (i.imm[0]) n_modify++; end
        OP_DIAG:   if (i.imm[0]) n_diag_m++; else n_diag_s++;
        OP_COVER:  n_cover++;
        OP_RECV:   n_recv++;
        OP_QUAL:   n_qual++;
        OP_DECIDE: n_decide++;
        OP_LP: begin
          case (i.bop) BOP_AND: n_and++; BOP_OR: n_or++; BOP_XOR: n_xor++; default: n_bnop++; endcase
          if (i.uop == UOP_NOT) n_not++;
          if (i.uop == UOP_SLC) n_slc++;
          if (i.dst == SEL_A) n_wr_a++;
        end
        default: ;
      endcase
    end
    if (job_done) n_jobs++;
    if (infra_done) begin
      if (dut.u_infra.repair_ok) n_rep_ok++; else n_rep_fail++;
    end
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic hw(logic [11:0] a, logic [31:0] d);
    @(negedge clk); wr = 1; addr = a; wdata = d;
    @(negedge clk); wr = 0;
  endtask

  task automatic hr(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; #1; d = rdata;
  endtask

  seq_state_t st [P];

  task automatic load_and_run(instr_t prog [$], output int run_cyc);
    logic [31:0] d;
    int guard;
    foreach (prog[k]) hw(12'(k), 32'(prog[k]));
    for (int p = 0; p < P; p++)
      for (int w = 0; w < N + 4; w++)
        hw(12'h400 + 12'(p * (N + 4) + w),
           32'((w < N) ? st[p].a[w] : (w == N) ? st[p].ma : (w == N + 1) ? st[p].mb :
               (w == N + 2) ? st[p].mc : st[p].md));
    hw(12'h800, 32'h1);
    guard = 0;
    do begin hr(12'h800, d); guard++; end while (d[0] && guard < 100000);
    hr(12'h800, d);
    check("job finished", d[1], 1);
    hr(12'h801, d);
    run_cyc = int'(d);
  endtask

  function automatic int model_run(instr_t prog [$]);
    int cyc = 0;
    foreach (prog[k]) begin
      logic [W-1:0] md_old [P];
      int len = 1;
      for (int p = 0; p < P; p++) md_old[p] = st[p].md;
      for (int p = 0; p < P; p++) begin
        logic [W-1:0] nb [8];
        int r = p / C, c = p % C;
        int ru = (r + R - 1) % R, rd = (r + 1) % R, cl = (c + C - 1) % C, cr = (c + 1) % C;
        nb[0] = md_old[ru * C + c];  nb[1] = md_old[ru * C + cr]; nb[2] = md_old[r * C + cr];
        nb[3] = md_old[rd * C + cr]; nb[4] = md_old[rd * C + c];  nb[5] = md_old[rd * C + cl];
        nb[6] = md_old[r * C + cl];  nb[7] = md_old[ru * C + cl];
        len = ref_step(st[p], prog[k], nb);
      end
      cyc += len;
      if (prog[k].op == OP_HALT) break;
    end
    return cyc;
  endfunction

  task automatic compare_windows(string name);
    logic [31:0] d;
    for (int p = 0; p < P; p++)
      for (int w = 0; w < N + 4; w++) begin
        hr(12'h400 + 12'(p * (N + 4) + w), d);
        check($sformatf("%s P%0d word %0d", name, p, w), d,
              32'((w < N) ? st[p].a[w] : (w == N) ? st[p].ma : (w == N + 1) ? st[p].mb :
                  (w == N + 2) ? st[p].mc : st[p].md));
      end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    int hw_cyc, ref_cyc;
    logic [31:0] d;
    wr = 0; addr = '0; wdata = '0; mem_we = 0; mem_row = '0; mem_col = '0; mem_wdata = 0;
    fault_en = '0; fault_val = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- job 1: every operation on random data ----------------
    prog = '{mk_instr(OP_SEARCH, .imm(0)),
             mk_instr(OP_DIAG, .imm(0)),
             mk_instr(OP_RECV, .imm(5'(DIR_E)), .dst(SEL_MC)),
             mk_instr(OP_LP, BOP_OR, UOP_NOP, SEL_MC, SEL_MD, SEL_MD),
             mk_instr(OP_SETROW, .imm(3)),
             mk_instr(OP_QUAL, .srca(SEL_MB), .srcb(SEL_A), .dst(SEL_MC)),
             mk_instr(OP_DECIDE, .srca(SEL_MC), .srcb(SEL_MD), .dst(SEL_MB)),
             mk_instr(OP_LP, BOP_XOR, UOP_NOT, SEL_MA, SEL_A, SEL_MD),
             mk_instr(OP_LP, BOP_NOP, UOP_SLC, SEL_MD, SEL_MD, SEL_MC),
             mk_instr(OP_DIAG, .imm(1)),
             mk_instr(OP_SEARCH, .imm(1)),
             mk_instr(OP_SETROW, .imm(1)),
             mk_instr(OP_LP, BOP_AND, UOP_NOP, SEL_MB, SEL_A, SEL_A),
             mk_instr(OP_RECV, .imm(5'(DIR_NW)), .dst(SEL_MB)),
             mk_instr(OP_COVER),
             mk_instr(OP_HALT)};
    for (int p = 0; p < P; p++) begin
      logic [W-1:0] q;
      q = 16'($urandom) & 16'($urandom) & 16'($urandom);
      for (int r = 0; r < N; r++) st[p].a[r] = (r % 4 == 0) ? (16'($urandom) | q) : 16'($urandom);
      st[p].ma = 16'($urandom); st[p].mb = q; st[p].mc = 16'($urandom); st[p].md = 16'($urandom);
      st[p].rp = 0;
    end
    load_and_run(prog, hw_cyc);
    ref_cyc = model_run(prog);
    check("job 1 run cycles", hw_cyc, ref_cyc + 1);
    compare_windows("job 1");

    // ---------------- job 2: the paper's quality and coverage examples -----
    prog = '{mk_instr(OP_QUAL, .srca(SEL_MA), .srcb(SEL_MB), .dst(SEL_MC)),
             mk_instr(OP_DECIDE, .srca(SEL_MC), .srcb(SEL_MD), .dst(SEL_MD)),
             mk_instr(OP_COVER),
             mk_instr(OP_HALT)};
    for (int p = 0; p < P; p++) begin
      logic [9:0] tab [11] = '{10'b1000001000, 10'b0001000010, 10'b0100100100, 10'b0000000001,
                               10'b0010010000, 10'b1110000000, 10'b0001000000, 10'b0000110000,
                               10'b0000001000, 10'b0000000100, 10'b0000000011};
      for (int r = 0; r < N; r++) st[p].a[r] = (r < 11) ? {tab[r], 6'b0} : '0;
      st[p].ma = {12'b110011001100, 4'b0};       // m
      st[p].mb = {12'b000011110101, 4'b0};       // A
      st[p].mc = '0;
      st[p].md = {12'b111111110000, 4'b0};       // competing quality with eight 1s
      st[p].rp = 0;
    end
    load_and_run(prog, hw_cyc);
    ref_cyc = model_run(prog);
    check("job 2 run cycles", hw_cyc, ref_cyc + 1);
    compare_windows("job 2");
    hr(12'h400 + 12'(N + 2), d); check("quality 6/12", d, 32'hFC00);
    hr(12'h400 + 12'(N + 3), d); check("decision keeps 6/12", d, 32'hFC00);
    hr(12'h400 + 12'(N), d);     check("coverage C2 C3 C5 C7 C8", d, 32'hF800);
    hr(12'h400 + 12'(N + 1), d); check("all ten faults covered", d, 32'hFFC0);

    // ---------------- infrastructure IP: test and repair -------------------
    begin
      int fr [10] = '{2, 2, 2, 4, 5, 5, 7, 8, 9, 9};
      int fc [10] = '{2, 5, 8, 3, 5, 8, 2, 5, 3, 7};
      int bad;
      for (int j = 0; j < 10; j++) begin
        fault_en[fr[j]-1][fc[j]-1] = 1; fault_val[fr[j]-1][fc[j]-1] = 1'(j);
      end
      hw(12'hC00, 32'h1);
      do hr(12'hC00, d); while (d[0]);
      check("infra faults found", d[31:16], 10);
      check("infra repaired", d[3], 1);
      check("infra no overflow", d[4], 0);
      check("infra columns chosen", dut.u_infra.spare_sel, 21'b011010110000000000000);
      bad = 0;
      for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
        @(negedge clk); mem_we = 1; mem_row = 4'(r); mem_col = 4'(c); mem_wdata = 1'((r + c) % 2);
      end
      @(negedge clk); mem_we = 0;
      for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
        mem_row = 4'(r); mem_col = 4'(c); #1; if (mem_rdata != 1'((r + c) % 2)) bad++;
      end
      check("repaired memory usable", bad, 0);
      fault_en = '0;
      for (int i = 0; i < 8; i++) begin fault_en[i][i] = 1; fault_val[i][i] = 1; end
      hw(12'hC00, 32'h1);
      do hr(12'hC00, d); while (d[0]);
      check("infra refuses eight columns", d[3], 0);
    end

    // ---------------- mechanisms seen ----------------
    repeat (3) @(posedge clk);
    begin
      string names [18] = '{"search", "search write-back", "diagnosis single", "diagnosis multiple",
        "coverage", "neighbour exchange", "quality", "decision", "and", "or", "xor",
        "binary nop", "not", "slc", "write to A row", "jobs", "repair ok", "repair refused"};
      int cnt [18];
      cnt = '{n_search, n_modify, n_diag_s, n_diag_m, n_cover, n_recv, n_qual, n_decide, n_and,
              n_or, n_xor, n_bnop, n_not, n_slc, n_wr_a, n_jobs, n_rep_ok, n_rep_fail};
      for (int k = 0; k < 18; k++) begin
        $display("mechanism %-20s %0d", names[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
