// tb_host_interface: drives bus writes and reads to all four regions with the
// control block idle and busy, and checks the decoded memory strobes, the
// arbitration, the go/start pulses, the read multiplexer and the done flag,
// first in directed steps and then with random traffic against a model.
module tb_host_interface;
  import lamp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr, go, ctrl_busy, ctrl_done, ctrl_dm_we, cm_we, dm_we, infra_start;
  logic [11:0] addr;
  logic [31:0] wdata, rdata, run_cycles, infra_status;
  logic [4:0] ctrl_cm_raddr, cm_waddr, cm_raddr;
  logic [8:0] ctrl_dm_addr, dm_addr;
  logic [15:0] ctrl_dm_wdata, dm_wdata, dm_rdata;
  instr_t cm_wdata, cm_rdata;

  host_interface dut (.clk, .rst_n, .wr, .addr, .wdata, .rdata, .go, .ctrl_busy, .ctrl_done,
    .run_cycles, .ctrl_cm_raddr, .ctrl_dm_addr, .ctrl_dm_we, .ctrl_dm_wdata, .cm_we, .cm_waddr,
    .cm_wdata, .cm_raddr, .cm_rdata, .dm_we, .dm_addr, .dm_wdata, .dm_rdata, .infra_start,
    .infra_status);
  always #5 clk = ~clk;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = 0; addr = '0; wdata = '0; ctrl_busy = 0; ctrl_done = 0; ctrl_dm_we = 0;
    ctrl_cm_raddr = 5'd7; ctrl_dm_addr = 9'd300; ctrl_dm_wdata = 16'hBEEF;
    run_cycles = 32'd1234; infra_status = 32'hCAFE0001;
    cm_rdata = instr_t'(22'h2ABCDE); dm_rdata = 16'h5A5A;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // region 0: command memory
    @(negedge clk); wr = 1; addr = 12'h013; wdata = 32'hFF3F_1234; #1;
    check("cm_we", cm_we, 1); check("dm_we", dm_we, 0); check("cm_waddr", cm_waddr, 5'h13);
    check("cm_wdata", cm_wdata, 22'h3F1234); check("go", go, 0);
    wr = 0; #1;
    check("cm read", rdata, 32'h002ABCDE); check("cm_raddr", cm_raddr, 5'h13);
    // region 1: data memory
    wr = 1; addr = 12'h400 + 12'd300; wdata = 32'h0001_8421; #1;
    check("dm_we", dm_we, 1); check("cm_we 0", cm_we, 0); check("dm_addr", dm_addr, 300);
    check("dm_wdata", dm_wdata, 16'h8421);
    wr = 0; #1; check("dm read", rdata, 32'h5A5A);
    // region 2: go, status, cycles
    wr = 1; addr = 12'h800; wdata = 32'h1; #1;
    check("go", go, 1); check("no infra start", infra_start, 0);
    @(negedge clk); wr = 0; addr = 12'h801; #1; check("run cycles", rdata, 1234);
    ctrl_busy = 1; addr = 12'h800; #1; check("status busy", rdata, 32'h1);
    // busy: control block owns the memories, host writes are dropped
    wr = 1; addr = 12'h405; wdata = 32'h7777; #1;
    check("dm_we from ctrl (0)", dm_we, 0); check("dm_addr from ctrl", dm_addr, 300);
    ctrl_dm_we = 1; #1; check("dm_we from ctrl", dm_we, 1); check("ctrl data", dm_wdata, 16'hBEEF);
    addr = 12'h002; #1; check("cm write blocked", cm_we, 0); check("cm_raddr ctrl", cm_raddr, 7);
    addr = 12'h800; wdata = 32'h1; #1; check("go blocked while busy", go, 0);
    @(negedge clk); wr = 0; ctrl_dm_we = 0; ctrl_done = 1;
    @(negedge clk); ctrl_done = 0; ctrl_busy = 0; #1;
    check("done flag", rdata, 32'h2);
    wr = 1; wdata = 32'h1; @(negedge clk); wr = 0; #1;
    check("done flag cleared by go", rdata, 32'h0);
    // region 3: infrastructure IP
    wr = 1; addr = 12'hC00; wdata = 32'h1; #1; check("infra start", infra_start, 1);
    wr = 0; #1; check("infra start pulse", infra_start, 0); check("infra status", rdata, 32'hCAFE0001);
    // random bus traffic against a model of the decoder, the arbitration and
    // the done flag (go clears it, a control-block done sets it)
    begin
      logic flag_m;
      logic [1:0] reg_m;
      logic [9:0] off_m;
      flag_m = 1'b0;
      @(negedge clk); wr = 1; addr = 12'h800; wdata = 32'h1; ctrl_busy = 0;
      @(negedge clk); wr = 0;
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        wr = 1'($urandom); addr = 12'($urandom); wdata = $urandom;
        // one access in three goes to the control registers
        if ($urandom_range(0, 2) == 0) addr = {2'd2, 9'd0, 1'($urandom)};
        ctrl_busy = ($urandom_range(0, 3) == 0); ctrl_done = ($urandom_range(0, 7) == 0);
        ctrl_dm_we = 1'($urandom); ctrl_cm_raddr = 5'($urandom);
        ctrl_dm_addr = 9'($urandom_range(0, 319)); ctrl_dm_wdata = 16'($urandom);
        cm_rdata = instr_t'(22'($urandom)); dm_rdata = 16'($urandom);
        run_cycles = $urandom; infra_status = $urandom;
        reg_m = addr[11:10]; off_m = addr[9:0];
        #1;
        check("rand go", go, wr && reg_m == 2'd2 && off_m == 0 && wdata[0] && !ctrl_busy);
        check("rand infra start", infra_start, wr && reg_m == 2'd3 && off_m == 0 && wdata[0]);
        check("rand cm_we", cm_we, wr && reg_m == 2'd0 && !ctrl_busy);
        check("rand dm_we", dm_we, ctrl_busy ? ctrl_dm_we : (wr && reg_m == 2'd1));
        check("rand dm_addr", dm_addr, ctrl_busy ? ctrl_dm_addr : 9'(off_m));
        check("rand cm_raddr", cm_raddr, ctrl_busy ? ctrl_cm_raddr : 5'(off_m));
        case (reg_m)
          2'd0:    check("rand read cm", rdata, 32'(cm_rdata));
          2'd1:    check("rand read dm", rdata, 32'(dm_rdata));
          2'd2:    check("rand read ctrl", rdata,
                         off_m[0] ? run_cycles : {30'd0, flag_m, ctrl_busy});
          default: check("rand read infra", rdata, infra_status);
        endcase
        if (go) flag_m = 1'b0;
        else if (ctrl_done) flag_m = 1'b1;
      end
      @(negedge clk); wr = 0; ctrl_busy = 0; ctrl_done = 0; ctrl_dm_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
