// tb_command_memory: fills every word with random instructions and reads
// them all back, then overwrites a few and rereads.
module tb_command_memory;
  import lamp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [4:0] waddr, raddr;
  instr_t wdata, rdata;
  logic [INSTR_W-1:0] shadow [32];

  command_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < 32; a++) begin
        if (pass == 0 || $urandom_range(0, 3) == 0) begin
          @(negedge clk); we = 1; waddr = 5'(a);
          wdata = instr_t'(INSTR_W'($urandom)); shadow[a] = wdata;
        end
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < 32; a++) begin
        raddr = 5'(a); #1;
        checks++;
        if (rdata !== shadow[a]) begin
          failures++; $display("FAIL word %0d: %h vs %h", a, rdata, shadow[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
