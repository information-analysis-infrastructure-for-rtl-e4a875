// tb_data_memory: random writes over the whole 320-word memory and read-back
// against a shadow copy.
module tb_data_memory;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [8:0] addr;
  logic [15:0] wdata, rdata;
  logic [15:0] shadow [320];

  data_memory dut (.clk, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = '0; wdata = '0;
    for (int a = 0; a < 320; a++) begin
      @(negedge clk); we = 1; addr = 9'(a); wdata = 16'($urandom); shadow[a] = wdata;
    end
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom_range(0, 319);
      @(negedge clk); we = 1; addr = 9'(a); wdata = 16'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 320; a++) begin
      addr = 9'(a); #1;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++; $display("FAIL word %0d: %h vs %h", a, rdata, shadow[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
