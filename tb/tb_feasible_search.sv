// tb_feasible_search: random matrices and queries; checks m_a, the optional
// write-back A_i := m_b & A_i, and that the search takes exactly N row cycles.
module tb_feasible_search;
  localparam int N = 16, W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, modify, a_we, busy, done;
  logic [W-1:0] mb, row, a_wdata, ma;
  logic [3:0] row_idx;
  logic [W-1:0] amat [N];

  feasible_search #(.N(N), .W(W)) dut (.clk, .rst_n, .start, .modify, .mb, .row_idx, .row,
                                      .a_we, .a_wdata, .busy, .done, .ma);
  always #5 clk = ~clk;
  assign row = amat[row_idx];
  always @(posedge clk) if (a_we) amat[row_idx] <= a_wdata;

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
    start = 0; modify = 0; mb = '0;
    for (int i = 0; i < N; i++) amat[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [W-1:0] q, exp_ma, ref_a [N];
      int cyc;
      q = 16'($urandom) & 16'($urandom);
      for (int i = 0; i < N; i++) begin
        // make some rows contain the query so both answers occur
        amat[i] = (i % 3 == 0) ? (16'($urandom) | q) : 16'($urandom);
        ref_a[i] = amat[i];
      end
      exp_ma = '0;
      for (int i = 0; i < N; i++) begin
        exp_ma[N-1-i] = ((ref_a[i] & q) == q);   // every 1 of the query is in the row
      end
      @(negedge clk); start = 1; mb = q; modify = t[0];
      @(negedge clk); start = 0; mb = ~q;      // sampled at start only
      cyc = 0;
      while (!done) begin @(negedge clk); if (busy) cyc++; end
      check("m_a", int'(ma), int'(exp_ma));
      for (int i = 0; i < N; i++)
        check("A write-back", int'(amat[i]), int'(t[0] ? (ref_a[i] & q) : ref_a[i]));
    end
    // cycle count: busy high for exactly N clocks
    begin
      int cyc = 0;
      @(negedge clk); start = 1; mb = '0;
      @(negedge clk); start = 0;
      while (busy) begin cyc++; @(negedge clk); end
      check("N cycles", cyc, N);
      check("empty query feasible everywhere", int'(ma), 16'hFFFF);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
