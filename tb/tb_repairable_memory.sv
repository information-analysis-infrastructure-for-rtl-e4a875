// tb_repairable_memory: writes and reads the main area through the decoder,
// checks that injected stuck-at cells misread, and that after remapping a
// row and a column the faulty cells are no longer used and the spares are.
// Then random decoder contents are checked against a reference map of the
// physical array: each main cell must reach exactly the cell predicted.
module tb_repairable_memory;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we, wdata, rdata, map_we, map_clear, map_is_col;
  logic [3:0] row, col, map_addr;
  logic [2:0] map_idx;
  logic [12:0][14:0] fault_en, fault_val;
  logic shadow [11][10];

  repairable_memory dut (.clk, .rst_n, .we, .row, .col, .wdata, .rdata, .map_we, .map_clear,
                         .map_is_col, .map_idx, .map_addr, .fault_en, .fault_val);
  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic fill_and_check(string what, int nbad_exp);
    int nbad;
    for (int r = 0; r < 11; r++)
      for (int c = 0; c < 10; c++) begin
        @(negedge clk); we = 1; row = 4'(r); col = 4'(c); wdata = 1'($urandom);
        shadow[r][c] = wdata;
      end
    @(negedge clk); we = 0;
    nbad = 0;
    for (int r = 0; r < 11; r++)
      for (int c = 0; c < 10; c++) begin
        row = 4'(r); col = 4'(c); #1;
        if (rdata != shadow[r][c]) nbad++;
      end
    check(what, nbad, nbad_exp);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wdata = 0; row = 0; col = 0; map_we = 0; map_clear = 0; map_is_col = 0;
    map_idx = 0; map_addr = 0; fault_en = '0; fault_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill_and_check("fault-free", 0);
    // stuck-at-1 in (3,4) and stuck-at-0 in (3,7) and (8,2); write all 0 then all 1
    fault_en[3][4] = 1; fault_val[3][4] = 1;
    fault_en[3][7] = 1; fault_val[3][7] = 0;
    fault_en[8][2] = 1; fault_val[8][2] = 0;
    for (int v = 0; v < 2; v++) begin
      int nbad;
      nbad = 0;
      for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
        @(negedge clk); we = 1; row = 4'(r); col = 4'(c); wdata = 1'(v);
      end
      @(negedge clk); we = 0;
      for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
        row = 4'(r); col = 4'(c); #1; if (rdata != 1'(v)) nbad++;
      end
      check(v ? "stuck-at-0 seen" : "stuck-at-1 seen", nbad, v ? 2 : 1);
    end
    // repair: row 3 -> spare row 1, column 2 -> spare column 4
    @(negedge clk); map_we = 1; map_is_col = 0; map_idx = 3'd1; map_addr = 4'd3;
    @(negedge clk); map_is_col = 1; map_idx = 3'd4; map_addr = 4'd2;
    @(negedge clk); map_we = 0;
    fill_and_check("repaired", 0);
    // spare cells really are used: a fault in spare row 12 (= 11+1) column 5 now shows
    fault_en[12][5] = 1; fault_val[12][5] = 1;
    @(negedge clk); we = 1; row = 4'd3; col = 4'd5; wdata = 0;
    @(negedge clk); we = 0; #1;
    check("spare row in use", int'(rdata), 1);
    // spare column 14 (= 10+4) for column 2
    fault_en[0][14] = 1; fault_val[0][14] = 1;
    @(negedge clk); we = 1; row = 4'd0; col = 4'd2; wdata = 0;
    @(negedge clk); we = 0; #1;
    check("spare column in use", int'(rdata), 1);
    // clear the decoder: the original faulty cells come back
    fault_en[12][5] = 0; fault_en[0][14] = 0;
    @(negedge clk); map_clear = 1;
    @(negedge clk); map_clear = 0;
    @(negedge clk); we = 1; row = 4'd3; col = 4'd4; wdata = 0;
    @(negedge clk); we = 0; #1;
    check("fault back after clear", int'(rdata), 1);
    // random decoder contents: every physical cell that the reference map
    // leaves unused is made faulty, so any access that lands elsewhere than
    // predicted reads a stuck value instead of its data
    for (int t = 0; t < 8; t++) begin
      int rmap [2], cmap [5];
      logic used [13][15];
      logic [12:0][14:0] en;
      int pr, pc, nbad;
      for (int k = 0; k < 2; k++) begin
        rmap[k] = $urandom_range(0, 10);
        while (k == 1 && rmap[1] == rmap[0]) rmap[1] = $urandom_range(0, 10);
      end
      for (int k = 0; k < 5; k++) begin
        logic again;
        again = 1;
        while (again) begin
          cmap[k] = $urandom_range(0, 9);
          again = 0;
          for (int j = 0; j < k; j++) if (cmap[j] == cmap[k]) again = 1;
        end
      end
      @(negedge clk); map_clear = 1;
      @(negedge clk); map_clear = 0; map_we = 1;
      for (int k = 0; k < 2; k++) begin
        map_is_col = 0; map_idx = 3'(k); map_addr = 4'(rmap[k]); @(negedge clk);
      end
      for (int k = 0; k < 5; k++) begin
        map_is_col = 1; map_idx = 3'(k); map_addr = 4'(cmap[k]); @(negedge clk);
      end
      map_we = 0;
      for (int r = 0; r < 13; r++) for (int c = 0; c < 15; c++) used[r][c] = 0;
      for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
        pr = r; pc = c;
        for (int k = 0; k < 2; k++) if (rmap[k] == r) pr = 11 + k;
        for (int k = 0; k < 5; k++) if (cmap[k] == c) pc = 10 + k;
        used[pr][pc] = 1;
      end
      en = '0;
      for (int r = 0; r < 13; r++) for (int c = 0; c < 15; c++) en[r][c] = !used[r][c];
      fault_en = en;
      for (int v = 0; v < 2; v++) begin
        // stuck values opposite to the data written in this pass
        fault_val = v ? '0 : '1;
        for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
          @(negedge clk); we = 1; row = 4'(r); col = 4'(c); wdata = 1'(v);
        end
        @(negedge clk); we = 0;
        nbad = 0;
        for (int r = 0; r < 11; r++) for (int c = 0; c < 10; c++) begin
          row = 4'(r); col = 4'(c); #1;
          checks++;
          if (rdata != 1'(v)) begin failures++; nbad++; end
        end
        if (nbad != 0) $display("FAIL random map %0d value %0d: %0d cells wrong", t, v, nbad);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
