// tb_coverage_unit: the 11 x 10 spare/fault table of the memory-repair example
// (first five spares chosen) and random tables against a greedy reference;
// checks the N-cycle duration.
module tb_coverage_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, busy16, done16;
  // 11 rows x 10 columns
  logic [3:0]  idx11;
  logic [9:0]  row11, mb11;
  logic [10:0] ma11;
  logic [9:0]  tab [11];
  // 16 x 16
  logic [3:0]  idx16;
  logic [15:0] row16, mb16, ma16;
  logic [15:0] rtab [16];

  coverage_unit #(.N(11), .W(10)) dut11 (.clk, .rst_n, .start, .row_idx(idx11), .row(row11),
                                        .busy, .done, .ma(ma11), .mb(mb11));
  coverage_unit dut16 (.clk, .rst_n, .start, .row_idx(idx16), .row(row16),
                       .busy(busy16), .done(done16), .ma(ma16), .mb(mb16));
  always #5 clk = ~clk;
  assign row11 = tab[idx11];
  assign row16 = rtab[idx16];

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
    // spares C2 C3 C5 C7 C8 R2 R4 R5 R7 R8 R9 against faults
    // F2,2 F2,5 F2,8 F4,3 F5,5 F5,8 F7,2 F8,5 F9,3 F9,7
    tab[0]  = 10'b1000001000;  tab[1]  = 10'b0001000010;  tab[2]  = 10'b0100100100;
    tab[3]  = 10'b0000000001;  tab[4]  = 10'b0010010000;  tab[5]  = 10'b1110000000;
    tab[6]  = 10'b0001000000;  tab[7]  = 10'b0000110000;  tab[8]  = 10'b0000001000;
    tab[9]  = 10'b0000000100;  tab[10] = 10'b0000000011;
    for (int i = 0; i < 16; i++) rtab[i] = '0;
    start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    begin
      int cyc = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (busy) begin cyc++; @(negedge clk); end
      check("repair example m_a", int'(ma11), int'(11'b11111000000));
      check("all faults covered", int'(mb11), 10'h3FF);
      check("n cycles", cyc, 11);
    end
    while (busy16) @(negedge clk);
    for (int t = 0; t < 50; t++) begin
      logic [15:0] cov, exp_ma;
      for (int i = 0; i < 16; i++) rtab[i] = 16'($urandom) & 16'($urandom) & 16'($urandom);
      cov = '0; exp_ma = '0;
      for (int i = 0; i < 16; i++) begin
        exp_ma[15-i] = (rtab[i] & ~cov) != 0;
        cov |= rtab[i];
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done16) @(negedge clk);
      check("random m_a", int'(ma16), int'(exp_ma));
      check("random m_b", int'(mb16), int'(cov));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
