// tb_decision_unit: the paper's example (Q1 with six 1s beats Q2 with eight)
// and random pairs of compacted vectors, where the one with fewer 1s must win.
module tb_decision_unit;
  int checks = 0, failures = 0;
  logic [15:0] q1, q2, q;
  logic y;
  logic [11:0] p1, p2, pq;
  logic py;

  decision_unit dut (.q1, .q2, .y, .q);
  decision_unit #(.W(12)) dut12 (.q1(p1), .q2(p2), .y(py), .q(pq));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [15:0] thermo(int k);
    logic [15:0] r = '0;
    for (int i = 0; i < k; i++) r[15-i] = 1'b1;
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p1 = 12'b111111000000; p2 = 12'b111111110000; #1;
    check("paper y", int'(py), 0);
    check("paper choice", int'(pq), int'(12'b111111000000));
    p1 = 12'b111111110000; p2 = 12'b111111000000; #1;
    check("swapped y", int'(py), 1);
    check("swapped choice", int'(pq), int'(12'b111111000000));
    for (int t = 0; t < 400; t++) begin
      int a, b;
      a = $urandom_range(0, 16); b = $urandom_range(0, 16);
      q1 = thermo(a); q2 = thermo(b); #1;
      check("y", int'(y), (a > b) ? 1 : 0);
      check("winner", int'(q), int'(thermo(a < b ? a : b)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
