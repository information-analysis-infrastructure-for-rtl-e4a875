// tb_quality_unit: checks the quality criterion against the paper's worked
// 12-bit example and against a bit-by-bit reference on random vectors.
module tb_quality_unit;
  int checks = 0, failures = 0;
  logic [11:0] m12, a12, d12, u12, v12, q12;
  logic [15:0] m, a, d, u, v, q;

  quality_unit #(.W(12)) dut12 (.m(m12), .a(a12), .d(d12), .mu_ma(u12), .mu_am(v12), .q(q12));
  quality_unit dut (.m(m), .a(a), .d(d), .mu_ma(u), .mu_am(v), .q(q));

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the worked example: m = 110011001100, A = 000011110101
    m12 = 12'b110011001100; a12 = 12'b000011110101; #1;
    // (the paper's printed d and Q rows carry a 1 at position 11 where both
    // inputs are 0; its stated count of six 1s matches the value below)
    check("d example",      16'(d12), 16'(12'b110000111001));
    check("mu(A in m) ex.", 16'(v12), 16'(12'b110000001000));
    check("mu(m in A) ex.", 16'(u12), 16'(12'b000000110001));
    check("Q example",      16'(q12), 16'(12'b110000111001));
    for (int t = 0; t < 500; t++) begin
      logic [15:0] ed, eu, ev;
      m = 16'($urandom); a = 16'($urandom); #1;
      for (int b = 0; b < 16; b++) begin
        ed[b] = (m[b] != a[b]);
        eu[b] = a[b] && !(m[b] && a[b]);
        ev[b] = m[b] && !(m[b] && a[b]);
      end
      check("d", d, ed); check("mu_ma", u, eu); check("mu_am", v, ev);
      check("q", q, ed | eu | ev);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
