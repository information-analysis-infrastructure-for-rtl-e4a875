// tb_compact_reg: loads vectors, compacts them in one clock and checks the
// result against a count of their 1s made in the testbench; includes the
// paper's 12-bit quality vector (six 1s).
module tb_compact_reg;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic load, compact;
  logic [15:0] din, q;
  logic [4:0]  count;
  logic [11:0] din12, q12;
  logic [3:0]  count12;

  compact_reg dut (.clk, .rst_n, .load, .compact, .din, .q, .count);
  compact_reg #(.W(12)) dut12 (.clk, .rst_n, .load, .compact, .din(din12), .q(q12),
                               .count(count12));

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic logic [15:0] thermo(int k, int w);
    logic [15:0] r = '0;
    for (int i = 0; i < k; i++) r[w-1-i] = 1'b1;
    return r;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; compact = 0; din = '0; din12 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper example: Q = 110000111001 -> six 1s -> 111111000000
    @(negedge clk); load = 1; din12 = 12'b110000111001; din = 16'hFFFF;
    @(negedge clk); load = 0; compact = 1;
    @(negedge clk); compact = 0;
    check("paper compaction", int'(q12), int'(12'b111111000000));
    check("paper index", int'(count12), 6);
    check("all ones", int'(q), 16'hFFFF);
    check("all ones count", int'(count), 16);
    for (int t = 0; t < 300; t++) begin
      int k;
      logic [15:0] v;
      v = (t == 0) ? 16'h0 : 16'($urandom);
      k = $countones(v);
      @(negedge clk); load = 1; din = v;
      @(negedge clk); load = 0; compact = 1;
      check("loaded", int'(q), int'(v));
      @(negedge clk); compact = 0;   // exactly one clock of compaction
      check("compacted", int'(q), int'(thermo(k, 16)));
      check("index", int'(count), k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
