// diagnosis_unit: search for the optimal (single or multiple) solution by
// analysing the rows of a fault table under a response vector m_a.
//
// Row i is a "1 row" when bit N-1-i of m_a is 1, else a "0 row". One row per
// clock, the unit accumulates
//   m_b := m_b and A_i  (single mode) or m_b or A_i (multiple mode) for 1 rows
//   m_c := m_c or A_i                                              for 0 rows
// starting from m_b = all 1s (single) or all 0s (multiple) and m_c = 0. After
// the N rows it forms m_d := m_b and not m_c in one more cycle. Unit
// coordinates of m_d name the faults (columns) consistent with the response.
// Timing: busy is high for N+1 cycles after start; done pulses after that.
// The accumulation rules, the and/or mode switch and m_d follow the paper.
// The paper states the initial value m_b = 1 for the and-accumulation; the
// all-0 start for multiple mode is this design's choice, needed for the
// or-accumulation to mean anything.
module diagnosis_unit #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 multiple,
  input  logic [W-1:0]         ma,       // response vector, sampled at start
  output logic [$clog2(N)-1:0] row_idx,
  input  logic [W-1:0]         row,
  output logic                 busy,
  output logic                 done,
  output logic [W-1:0]         mb,
  output logic [W-1:0]         mc,
  output logic [W-1:0]         md
);
  logic [W-1:0] ma_r;
  logic         mul_r, last;
  logic         flag;

  assign flag = ma_r[W-1];   // m_a is shifted left one place per row

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; row_idx <= '0; ma_r <= '0; mul_r <= 1'b0;
      last <= 1'b0; mb <= '0; mc <= '0; md <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; last <= 1'b0; row_idx <= '0; mul_r <= multiple;
        ma_r <= ma << (W - N);
        mb <= multiple ? '0 : '1;
        mc <= '0;
      end else if (busy && last) begin
        md <= mb & ~mc;
        busy <= 1'b0; last <= 1'b0; done <= 1'b1;
      end else if (busy) begin
        if (flag) mb <= mul_r ? (mb | row) : (mb & row);
        else      mc <= mc | row;
        ma_r <= ma_r << 1;
        if (row_idx == ($clog2(N))'(N - 1)) last <= 1'b1;
        else row_idx <= row_idx + 1'b1;
      end
    end
  end
endmodule
