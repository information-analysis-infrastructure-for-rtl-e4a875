// feasible_search: search for all feasible solutions of a query (column/row
// analysis of an A-matrix).
//
// For each row A_i of an N-row matrix, one row per clock, the unit forms
// (m_b and A_i) xor m_b and reduces it with NOR: the bit is 1 when every 1 of
// the query m_b is also a 1 of A_i (row i is a feasible solution) and 0 when
// the row contradicts the query. The bits are shifted into m_a from the right,
// so after N cycles row i owns bit N-1-i of m_a. With modify=1 the unit also
// writes A_i := m_b and A_i back, removing the coordinates that do not matter
// for the query.
// Timing: start is taken in one cycle; busy is then high for exactly N cycles,
// during which row_idx addresses the row (read combinationally by the owner of
// the matrix); done pulses in the cycle after the last row.
// The per-row formula and the one-row-per-cycle schedule are the paper's; the
// start/busy/done handshake is this design's own.
module feasible_search #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 modify,
  input  logic [W-1:0]         mb,       // query, sampled at start
  output logic [$clog2(N)-1:0] row_idx,
  input  logic [W-1:0]         row,      // A[row_idx]
  output logic                 a_we,
  output logic [W-1:0]         a_wdata,
  output logic                 busy,
  output logic                 done,
  output logic [W-1:0]         ma
);
  logic [W-1:0] q_r;
  logic         mod_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; row_idx <= '0; ma <= '0; q_r <= '0; mod_r <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; row_idx <= '0; ma <= '0; q_r <= mb; mod_r <= modify;
      end else if (busy) begin
        ma <= {ma[W-2:0], ~|((q_r & row) ^ q_r)};
        if (row_idx == ($clog2(N))'(N - 1)) begin
          busy <= 1'b0; done <= 1'b1;
        end else begin
          row_idx <= row_idx + 1'b1;
        end
      end
    end
  end

  assign a_we    = busy & mod_r;
  assign a_wdata = q_r & row;
endmodule
