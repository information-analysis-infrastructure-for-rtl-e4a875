// tb_control_block: runs jobs through the control block with memories and a
// multiprocessor modelled in the testbench. The model records the program
// words broadcast to the sequencers and the data windows written into them,
// stays busy for a fixed number of clocks after start and then inverts every
// window word; the test checks the broadcast program, the windows loaded, the
// results stored back, the RUN length and the busy/done protocol.
module tb_control_block;
  import lamp_pkg::*;
  localparam int P = 4, N = 4, W = 16, D = 8, DM = P * (N + 4), RUNLEN = 13;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic go, busy, done, dm_we, seq_cm_we, seq_io_we, seq_start;
  logic [31:0] run_cycles;
  logic [2:0] cm_raddr, seq_cm_addr;
  instr_t cm_rdata, seq_cm_wdata;
  logic [4:0] dm_addr;
  logic [W-1:0] dm_wdata, dm_rdata, seq_io_wdata, seq_io_rdata;
  logic [1:0] seq_sel;
  logic [2:0] seq_io_addr;
  logic [P-1:0] seq_busy;

  control_block #(.P(P), .N(N), .W(W), .CM_DEPTH(D)) dut (
    .clk, .rst_n, .go, .busy, .done, .run_cycles, .cm_raddr, .cm_rdata, .dm_addr, .dm_we,
    .dm_wdata, .dm_rdata, .seq_cm_we, .seq_cm_addr, .seq_cm_wdata, .seq_sel, .seq_io_we,
    .seq_io_addr, .seq_io_wdata, .seq_io_rdata, .seq_start, .seq_busy);
  always #5 clk = ~clk;

  // models
  instr_t       gcm [D];
  logic [W-1:0] gdm [DM];
  instr_t       scm [D];
  logic [W-1:0] win [P][N+4];
  int           run_left;
  assign cm_rdata     = gcm[cm_raddr];
  assign dm_rdata     = gdm[dm_addr];
  assign seq_io_rdata = win[seq_sel][seq_io_addr];
  always @(posedge clk) begin
    if (dm_we) gdm[dm_addr] <= dm_wdata;
    if (seq_cm_we) scm[seq_cm_addr] <= seq_cm_wdata;
    if (seq_io_we) win[seq_sel][seq_io_addr] <= seq_io_wdata;
    if (!rst_n) begin
      run_left <= 0; seq_busy <= '0;
    end else if (seq_start) begin
      run_left <= RUNLEN;
      seq_busy <= '1;
    end else if (run_left > 1) run_left <= run_left - 1;
    else if (run_left == 1) begin
      run_left <= 0; seq_busy <= '0;
      for (int p = 0; p < P; p++) for (int w = 0; w < N + 4; w++) win[p][w] <= ~win[p][w];
    end
  end

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
    go = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 3; job++) begin
      logic [W-1:0] orig [DM];
      int total, starts;
      total = 0; starts = 0;
      for (int k = 0; k < D; k++) gcm[k] = instr_t'(INSTR_W'($urandom));
      for (int a = 0; a < DM; a++) begin gdm[a] = 16'($urandom); orig[a] = gdm[a]; end
      @(negedge clk); go = 1;
      @(negedge clk); go = 0;
      check("busy after go", int'(busy), 1);
      while (!done) begin
        @(negedge clk); total++;
        if (seq_start) starts++;
      end
      @(negedge clk);
      check("busy low at end", int'(busy), 0);
      check("one start pulse", starts, 1);
      for (int k = 0; k < D; k++) check("program broadcast", int'(scm[k]), int'(gcm[k]));
      for (int a = 0; a < DM; a++) check("result stored", int'(gdm[a]), int'(16'(~orig[a])));
      check("run cycles", int'(run_cycles), RUNLEN + 1);
      // load D words, P*(N+4) in, start, run, P*(N+4) out
      check("job length", total, D + 2 * DM + 1 + RUNLEN + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
