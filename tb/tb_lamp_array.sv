// tb_lamp_array: gives every sequencer of the 4x4 torus a distinct m_d, runs
// programs that fetch the m_d of all eight neighbours, and checks each value
// against the wrap-around neighbour computed in the testbench; also checks the
// broadcast start and the per-sequencer done.
module tb_lamp_array;
  import lamp_pkg::*;
  localparam int R = 4, C = 4, P = 16, N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cm_we, io_we, start;
  logic [4:0] cm_addr, io_addr;
  logic [3:0] io_sel;
  instr_t cm_wdata;
  logic [15:0] io_wdata, io_rdata;
  logic [P-1:0] busy, done;

  lamp_array dut (.clk, .rst_n, .cm_we, .cm_addr, .cm_wdata, .io_sel, .io_we, .io_addr,
                  .io_wdata, .io_rdata, .start, .busy, .done);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  function automatic int nb(int p, int dir);
    int r = p / C, c = p % C, dr, dc;
    case (dir)
      0: begin dr = -1; dc = 0;  end
      1: begin dr = -1; dc = 1;  end
      2: begin dr = 0;  dc = 1;  end
      3: begin dr = 1;  dc = 1;  end
      4: begin dr = 1;  dc = 0;  end
      5: begin dr = 1;  dc = -1; end
      6: begin dr = 0;  dc = -1; end
      default: begin dr = -1; dc = -1; end
    endcase
    return ((r + dr + R) % R) * C + ((c + dc + C) % C);
  endfunction

  function automatic logic [15:0] tag(int p);
    return 16'h1000 * 16'(p % 16) + 16'h0101 * 16'(p + 1);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cm_we = 0; io_we = 0; start = 0; cm_addr = '0; io_addr = '0; io_sel = '0;
    cm_wdata = '0; io_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      int d0, d1, d2;
      instr_t prog [4];
      d0 = 3 * g; d1 = 3 * g + 1; d2 = 3 * g + 2;
      prog[0] = mk_instr(OP_RECV, .imm(5'(d0 % 8)), .dst(SEL_MA));
      prog[1] = mk_instr(OP_RECV, .imm(5'(d1 % 8)), .dst(SEL_MB));
      prog[2] = mk_instr(OP_RECV, .imm(5'(d2 % 8)), .dst(SEL_MC));
      prog[3] = mk_instr(OP_HALT);
      for (int k = 0; k < 4; k++) begin
        @(negedge clk); cm_we = 1; cm_addr = 5'(k); cm_wdata = prog[k];
      end
      @(negedge clk); cm_we = 0;
      for (int p = 0; p < P; p++) begin
        @(negedge clk); io_we = 1; io_sel = 4'(p); io_addr = 5'(N + 3); io_wdata = tag(p);
      end
      @(negedge clk); io_we = 0; start = 1;
      @(negedge clk); start = 0;
      check("all busy", int'(busy), 16'hFFFF);
      while (done != '1) begin
        @(negedge clk);
      end
      for (int p = 0; p < P; p++) begin
        io_sel = 4'(p);
        io_addr = 5'(N);     #1; check($sformatf("P%0d dir %0d", p, d0 % 8), int'(io_rdata), int'(tag(nb(p, d0 % 8))));
        io_addr = 5'(N + 1); #1; check($sformatf("P%0d dir %0d", p, d1 % 8), int'(io_rdata), int'(tag(nb(p, d1 % 8))));
        io_addr = 5'(N + 2); #1; check($sformatf("P%0d dir %0d", p, d2 % 8), int'(io_rdata), int'(tag(nb(p, d2 % 8))));
      end
      @(negedge clk);
      check("all idle", int'(busy), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
