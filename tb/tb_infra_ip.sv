// tb_infra_ip: runs the whole test / cover / repair / retest cycle on defect
// patterns: the ten-fault memory of the repair example (five spare columns
// chosen), a fault-free memory, random repairable patterns, a pattern that
// needs too many spares, more faults than the list holds, and defective spare
// cells that the retest must catch (one fixed case, then random ones). The
// choice of spares is predicted by a greedy reference in the testbench; the
// cycle count of a run is checked.
module tb_infra_ip;
  localparam int ROWS = 11, COLS = 10, SR = 2, SC = 5, MAXF = 16, NC = ROWS + COLS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, overflow, repair_ok;
  logic [4:0] nfaults;
  logic [NC-1:0] spare_sel;
  logic [31:0] status;
  logic u_we, u_wdata, u_rdata;
  logic [3:0] u_row, u_col;
  logic [12:0][14:0] fault_en, fault_val;

  infra_ip dut (.clk, .rst_n, .start, .busy, .done, .nfaults, .overflow, .spare_sel, .repair_ok,
                .status, .u_we, .u_row, .u_col, .u_wdata, .u_rdata, .fault_en, .fault_val);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // greedy reference: candidates are columns 0..COLS-1 then rows 0..ROWS-1
  function automatic logic [NC-1:0] ref_sel(output int nf, output int ncol, output int nrow);
    int fr [MAXF], fc [MAXF];
    logic covered [MAXF];
    logic [NC-1:0] sel = '0;
    nf = 0; ncol = 0; nrow = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (fault_en[r][c] && nf < MAXF) begin fr[nf] = r; fc[nf] = c; nf++; end
    for (int j = 0; j < MAXF; j++) covered[j] = 0;
    for (int k = 0; k < NC; k++) begin
      logic gain = 0;
      for (int j = 0; j < nf; j++) begin
        logic hit = (k < COLS) ? (fc[j] == k) : (fr[j] == k - COLS);
        if (hit && !covered[j]) begin gain = 1; covered[j] = 1; end
      end
      sel[NC-1-k] = gain;
      if (gain) begin if (k < COLS) ncol++; else nrow++; end
    end
    return sel;
  endfunction

  task automatic run(string name, int exp_ok_in, int exp_ovf);
    int exp_ok = exp_ok_in;
    int cyc, nf, ncol, nrow;
    logic [NC-1:0] esel;
    esel = ref_sel(nf, ncol, nrow);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check({name, " faults"}, int'(nfaults), exp_ovf ? MAXF : nf);
    check({name, " overflow"}, int'(overflow), exp_ovf);
    if (!exp_ovf) check({name, " spares chosen"}, int'(spare_sel), int'(esel));
    // -1: a defect-free spare area is assumed, so the repair works when the
    // choice fits the spares
    if (exp_ok == -1) exp_ok = int'(ncol <= SC && nrow <= SR);
    check({name, " repair ok"}, int'(repair_ok), exp_ok);
    // start 1, test 4 x 110, list 110, cover 1 + 21 + 1, repair 21, retest 4 x 110
    check({name, " cycles"}, cyc, 1 + 4 * ROWS * COLS + ROWS * COLS + 1 + NC + 1 + NC + 4 * ROWS * COLS);
  endtask

  task automatic user_check(string name);
    logic sh [ROWS][COLS];
    int bad = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      @(negedge clk); u_we = 1; u_row = 4'(r); u_col = 4'(c); u_wdata = 1'($urandom);
      sh[r][c] = u_wdata;
    end
    @(negedge clk); u_we = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      u_row = 4'(r); u_col = 4'(c); #1; if (u_rdata != sh[r][c]) bad++;
    end
    check({name, " user data intact"}, bad, 0);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fr [10] = '{2, 2, 2, 4, 5, 5, 7, 8, 9, 9};
    int fc [10] = '{2, 5, 8, 3, 5, 8, 2, 5, 3, 7};
    start = 0; u_we = 0; u_row = 0; u_col = 0; u_wdata = 0; fault_en = '0; fault_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the repair example: faults F(r,c), 1-based
    for (int j = 0; j < 10; j++) begin
      fault_en[fr[j]-1][fc[j]-1] = 1; fault_val[fr[j]-1][fc[j]-1] = 1'(j);
    end
    run("example", 1, 0);
    // columns C2 C3 C5 C7 C8 are candidates 1 2 4 6 7
    check("example columns", int'(spare_sel),
          int'((21'(1) << 19) | (21'(1) << 18) | (21'(1) << 16) | (21'(1) << 14) | (21'(1) << 13)));
    user_check("example");
    // fault-free
    fault_en = '0;
    run("clean", 1, 0);
    check("clean selects nothing", int'(spare_sel), 0);
    // random repairable: up to 2 faulty rows' worth of cells plus cells in up to 3 columns
    for (int t = 0; t < 6; t++) begin
      int r1, r2;
      fault_en = '0; fault_val = '0;
      r1 = $urandom_range(0, ROWS - 1); r2 = $urandom_range(0, ROWS - 1);
      for (int k = 0; k < 3; k++) begin
        int c;
        c = $urandom_range(0, COLS - 1);
        fault_en[$urandom_range(0, ROWS - 1)][c] = 1;
        fault_en[$urandom_range(0, ROWS - 1)][c] = 1;
      end
      fault_en[r1][$urandom_range(0, COLS - 1)] = 1;
      fault_val = 195'($urandom) ^ (195'($urandom) << 32);
      run("random", -1, 0);
      if (repair_ok) user_check("random");
    end
    // diagonal: eight columns needed, only five spares
    fault_en = '0;
    for (int i = 0; i < 8; i++) begin fault_en[i][i] = 1; fault_val[i][i] = 1; end
    run("too many", 0, 0);
    // 17 faults: list overflow
    fault_en = '0;
    for (int i = 0; i < 17; i++) begin fault_en[i % ROWS][(i * 3) % COLS] = 1; end
    run("overflow", 0, 1);
    // defective spare: fault at (0,0) is repaired with spare column 10, whose row 0 is bad
    fault_en = '0; fault_val = '0;
    fault_en[0][0] = 1; fault_val[0][0] = 1;
    fault_en[0][10] = 1; fault_val[0][10] = 1;
    run("bad spare", 0, 0);
    // more defective spares: faults in two columns take spare columns 10 and
    // 11; one cell of either spare column is stuck at a random value
    for (int t = 0; t < 6; t++) begin
      int ca, cb;
      ca = $urandom_range(0, COLS - 2); cb = $urandom_range(ca + 1, COLS - 1);
      fault_en = '0; fault_val = '0;
      fault_en[$urandom_range(0, ROWS - 1)][ca] = 1;
      fault_en[$urandom_range(0, ROWS - 1)][cb] = 1;
      fault_en[$urandom_range(0, ROWS - 1)][COLS + (t % 2)] = 1;
      fault_val = 195'($urandom) ^ (195'($urandom) << 32);
      run("bad spare column", 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
