// coverage_unit: quasi-optimal coverage of the columns of a table by rows.
//
// With m_b and m_a cleared at start, the unit visits the N rows one per
// clock. For row A_i it reduces (m_b or A_i) and not m_b with OR: the bit is 1
// when the row covers at least one column not yet covered. That bit is shifted
// into m_a from the right and m_b := m_b or A_i. After N cycles the 1s of m_a
// (row i at bit N-1-i) select a set of rows that covers every column any row
// covers, and m_b holds the covered columns. The result is greedy in row
// order, so not always minimal.
// Timing: busy is high for exactly N cycles after start (the paper's
// complexity of n vector operations); done pulses after that.
// Formulas, clearing and serial shifting follow the paper; the handshake is
// this design's own.
module coverage_unit #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic [$clog2(N)-1:0] row_idx,
  input  logic [W-1:0]         row,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         ma,
  output logic [W-1:0]         mb
);
  logic [W-1:0] nxt;
  assign nxt = mb | row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; row_idx <= '0; ma <= '0; mb <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; row_idx <= '0; ma <= '0; mb <= '0;
      end else if (busy) begin
        ma <= {ma[N-2:0], |(nxt & ~mb)};
        mb <= nxt;
        if (row_idx == ($clog2(N))'(N - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end else begin
          row_idx <= row_idx + 1'b1;
        end
      end
    end
  end
endmodule
