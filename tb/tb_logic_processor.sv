// tb_logic_processor: every operand pair, binary and unary operator on random
// data, compared with a reference written in the testbench.
module tb_logic_processor;
  import lamp_pkg::*;
  int checks = 0, failures = 0;
  bop_e bop; uop_e uop; sel_e srca, srcb;
  logic [15:0] a_row, ma, mb, mc, md, result;

  logic_processor dut (.bop, .uop, .srca, .srcb, .a_row, .ma, .mb, .mc, .md, .result);

  function automatic logic [15:0] opnd(int s);
    case (s)
      0: return a_row; 1: return ma; 2: return mb; 3: return mc; default: return md;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      a_row = 16'($urandom); ma = 16'($urandom); mb = 16'($urandom);
      mc = 16'($urandom); md = 16'($urandom);
      for (int sa = 0; sa < 5; sa++)
        for (int sb = 0; sb < 5; sb++)
          for (int b = 0; b < 4; b++)
            for (int u = 0; u < 3; u++) begin
              logic [15:0] x, y, e;
              int k;
              srca = sel_e'(sa); srcb = sel_e'(sb); bop = bop_e'(b); uop = uop_e'(u);
              #1;
              x = opnd(sa);
              case (b)
                0: y = x & opnd(sb);
                1: y = x | opnd(sb);
                2: y = x ^ opnd(sb);
                default: y = x;
              endcase
              if (u == 1) e = ~y;
              else if (u == 2) begin
                k = $countones(y);
                e = '0;
                for (int i = 0; i < k; i++) e[15-i] = 1'b1;
              end else e = y;
              checks++;
              if (result !== e) begin
                failures++;
                if (failures < 10)
                  $display("FAIL sa=%0d sb=%0d b=%0d u=%0d got %h exp %h", sa, sb, b, u, result, e);
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
