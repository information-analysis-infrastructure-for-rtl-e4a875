// tb_diagnosis_unit: random fault tables and response vectors in single and
// multiple mode, compared with the accumulation formulas computed in the
// testbench; checks the N+1 cycle duration.
module tb_diagnosis_unit;
  localparam int N = 16, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, multiple, busy, done;
  logic [W-1:0] ma, row, mb, mc, md;
  logic [3:0] row_idx;
  logic [W-1:0] amat [N];

  diagnosis_unit #(.N(N), .W(W)) dut (.clk, .rst_n, .start, .multiple, .ma, .row_idx, .row,
                                     .busy, .done, .mb, .mc, .md);
  always #5 clk = ~clk;
  assign row = amat[row_idx];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; multiple = 0; ma = '0;
    for (int i = 0; i < N; i++) amat[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [W-1:0] resp, and1, or1, or0;
      int cyc;
      resp = 16'($urandom);
      for (int i = 0; i < N; i++)
        amat[i] = t[0] ? (16'($urandom) & 16'($urandom) & 16'($urandom)) : (16'($urandom) | 16'($urandom));
      and1 = '1; or1 = '0; or0 = '0;
      for (int i = 0; i < N; i++)
        if (resp[N-1-i]) begin and1 &= amat[i]; or1 |= amat[i]; end
        else or0 |= amat[i];
      @(negedge clk); start = 1; ma = resp; multiple = t[0];
      @(negedge clk); start = 0; ma = ~resp;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check("cycles", cyc, N + 2);   // N+1 busy clocks, then done
      check("m_b", int'(mb), int'(t[0] ? or1 : and1));
      check("m_c", int'(mc), int'(or0));
      check("m_d", int'(md), int'((t[0] ? or1 : and1) & ~or0));
    end
    // single fault: rows detecting fault 5 fail, others pass
    for (int i = 0; i < N; i++) amat[i] = (16'(1) << ((i * 7) % 16)) | (16'(1) << ((i * 3 + 1) % 16));
    begin
      logic [W-1:0] resp = '0;
      for (int i = 0; i < N; i++) resp[N-1-i] = amat[i][5];
      @(negedge clk); start = 1; ma = resp; multiple = 0;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check("single fault located", int'(md), int'(16'(1) << 5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
