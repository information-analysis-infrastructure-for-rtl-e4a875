// infra_ip: infrastructure IP for embedded test, coverage optimisation and
// repair of a memory with spare rows and columns.
//
// The unit owns a repairable_memory (the unit under test) and, after a start
// pulse, runs the whole service cycle without outside help:
//   TEST    writes 0 to every main cell, reads all back, writes 1, reads all
//           back. Each read is compared (xor) with the fault-free reference
//           value (the model under test); a mismatch marks the cell faulty.
//   LIST    scans the fault map row by row and records up to MAXF faulty
//           cells (row, column) in that order; more faults set overflow.
//   COVER   runs coverage_unit over a table with one row per candidate spare:
//           first one row per memory column (COLS rows), then one per memory
//           row (ROWS rows), in increasing order. Row k holds a 1 at fault j
//           (bit MAXF-1-j) when that spare would repair fault j. Candidates
//           that repair nothing are all-zero rows and are never chosen.
//   REPAIR  walks the chosen candidates and programs the address decoder,
//           giving the chosen columns and rows the spare columns and rows in
//           order (as many as there are). Meanwhile two compact_reg
//           instances count the chosen columns and rows by compacting their
//           1s; more than SC columns or SR rows is a failure.
//   RETEST  repeats TEST through the programmed decoder.
// repair_ok is 1 when the choice fits the spares and the retest finds no
// faulty cell. While idle the memory port is the user's.
// The four stages (testing, diagnosis/optimisation, repair by readdressing)
// and the coverage procedure follow the paper, as does counting the chosen
// spares with the compaction register instead of an adder. The paper places a
// separate diagnosis stage (fault-table analysis) between testing and
// optimisation;
// here the address-ordered memory test locates each faulty cell directly, so
// that stage reduces to LIST. The march pattern, candidate order and all
// timing are this design's own.
// The coverage unit's busy and covered-fault vector are not used: its length
// is fixed, and every listed fault is covered by its own column candidate.
// Of the counting registers only the counts are used, not the packed vectors.
// Status bits 15:5 and 1, and the count bits above the fault count width, are
// always 0.
module infra_ip #(
  parameter int unsigned ROWS = 11,
  parameter int unsigned COLS = 10,
  parameter int unsigned SR   = 2,
  parameter int unsigned SC   = 5,
  parameter int unsigned MAXF = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  output logic                             busy,
  output logic                             done,
  output logic [$clog2(MAXF+1)-1:0]        nfaults,
  output logic                             overflow,
  output logic [COLS+ROWS-1:0]             spare_sel,   // candidate k at bit COLS+ROWS-1-k
  output logic                             repair_ok,
  output logic [31:0]                      status,
  // user memory port
  input  logic                             u_we,
  input  logic [$clog2(ROWS)-1:0]          u_row,
  input  logic [$clog2(COLS)-1:0]          u_col,
  input  logic                             u_wdata,
  output logic                             u_rdata,
  // defect model of the memory
  input  logic [ROWS+SR-1:0][COLS+SC-1:0]  fault_en,
  input  logic [ROWS+SR-1:0][COLS+SC-1:0]  fault_val
);
  localparam int unsigned NC = COLS + ROWS;
  localparam int unsigned RA = $clog2(ROWS);
  localparam int unsigned CA = $clog2(COLS);
  localparam int unsigned KW = $clog2(NC);
  localparam int unsigned MW = $clog2(COLS > ROWS ? COLS : ROWS);
  localparam int unsigned IW = $clog2(SC > SR ? SC : SR);

  typedef enum logic [2:0] {F_IDLE, F_TEST, F_LIST, F_COVER, F_CWAIT, F_REPAIR, F_RETEST}
    fstate_e;

  fstate_e            st;
  logic [1:0]         phase;          // 0: w0, 1: r0, 2: w1, 3: r1
  logic [RA-1:0]      r;
  logic [CA-1:0]      c;
  logic [COLS-1:0]    fail_map [ROWS];
  logic [RA-1:0]      f_row [MAXF];
  logic [CA-1:0]      f_col [MAXF];
  logic [KW-1:0]      k;
  logic [IW:0]        ncol_used, nrow_used;
  logic               fit, any_fail, done_flag;

  // memory and its port
  logic               m_we, m_wdata, m_rdata, mut_bit, last_addr;
  logic [RA-1:0]      m_row;
  logic [CA-1:0]      m_col;
  logic               map_we, map_clear, map_is_col;
  logic [IW-1:0]      map_idx;
  logic [MW-1:0]      map_addr;

  assign last_addr = (r == RA'(ROWS - 1)) && (c == CA'(COLS - 1));
  assign mut_bit   = phase[1];        // reference model: value last written

  always_comb begin
    if (busy) begin
      m_we    = (st == F_TEST || st == F_RETEST) && !phase[0];
      m_row   = r;
      m_col   = c;
      m_wdata = mut_bit;
    end else begin
      m_we    = u_we;
      m_row   = u_row;
      m_col   = u_col;
      m_wdata = u_wdata;
    end
  end
  assign u_rdata = m_rdata;

  repairable_memory #(.ROWS(ROWS), .COLS(COLS), .SR(SR), .SC(SC)) u_mem (
    .clk, .rst_n, .we(m_we), .row(m_row), .col(m_col), .wdata(m_wdata), .rdata(m_rdata),
    .map_we(map_we), .map_clear(map_clear), .map_is_col(map_is_col), .map_idx(map_idx),
    .map_addr(map_addr), .fault_en(fault_en), .fault_val(fault_val));

  // coverage table row, built from the fault list
  logic [KW-1:0]    cv_idx;
  logic [MAXF-1:0]  cv_row;
  logic             cv_busy, cv_done, cv_start;
  logic [NC-1:0]    cv_ma;
  logic [MAXF-1:0]  cv_mb;

  always_comb begin
    cv_row = '0;
    for (int j = 0; j < MAXF; j++) begin
      if (32'(j) < 32'(nfaults)) begin
        if (32'(cv_idx) < COLS) cv_row[MAXF-1-j] = (32'(f_col[j]) == 32'(cv_idx));
        else                    cv_row[MAXF-1-j] = (32'(f_row[j]) == 32'(cv_idx) - COLS);
      end
    end
  end

  assign cv_start = (st == F_COVER);

  coverage_unit #(.N(NC), .W(MAXF)) u_cov (
    .clk, .rst_n, .start(cv_start), .row_idx(cv_idx), .row(cv_row),
    .busy(cv_busy), .done(cv_done), .ma(cv_ma), .mb(cv_mb));

  // budget: the chosen columns and the chosen rows are loaded into two
  // compaction registers when coverage ends and compacted in the first repair
  // cycle; their counts (number of 1s, found without adding) are compared with
  // the spare columns and rows at the end of the repair walk
  logic [$clog2(COLS+1)-1:0] ccount;
  logic [$clog2(ROWS+1)-1:0] rcount;
  logic [COLS-1:0]           csel_q;
  logic [ROWS-1:0]           rsel_q;
  logic                      cnt_load, cnt_compact;
  assign cnt_load    = (st == F_CWAIT) && cv_done;
  assign cnt_compact = (st == F_REPAIR) && (k == '0);

  compact_reg #(.W(COLS)) u_ccnt (
    .clk, .rst_n, .load(cnt_load), .compact(cnt_compact),
    .din(cv_ma[NC-1 -: COLS]), .q(csel_q), .count(ccount));
  compact_reg #(.W(ROWS)) u_rcnt (
    .clk, .rst_n, .load(cnt_load), .compact(cnt_compact),
    .din(cv_ma[ROWS-1:0]), .q(rsel_q), .count(rcount));

  // repair: program the decoder for the candidate k when it is chosen
  logic chosen, k_is_col, room;
  assign chosen     = (st == F_REPAIR) && spare_sel[(NC-1) - 32'(k)];
  assign k_is_col   = 32'(k) < COLS;
  assign room       = k_is_col ? (32'(ncol_used) < SC) : (32'(nrow_used) < SR);
  assign map_we     = chosen && room;
  assign map_clear  = (st == F_IDLE) && start;
  assign map_is_col = k_is_col;
  assign map_idx    = k_is_col ? IW'(ncol_used) : IW'(nrow_used);
  assign map_addr   = k_is_col ? MW'(k) : MW'(32'(k) - COLS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; phase <= '0; r <= '0; c <= '0; k <= '0; busy <= 1'b0; done <= 1'b0;
      nfaults <= '0; overflow <= 1'b0; spare_sel <= '0; repair_ok <= 1'b0;
      ncol_used <= '0; nrow_used <= '0; fit <= 1'b1; any_fail <= 1'b0; done_flag <= 1'b0;
      for (int i = 0; i < ROWS; i++) fail_map[i] <= '0;
      for (int j = 0; j < MAXF; j++) begin f_row[j] <= '0; f_col[j] <= '0; end
    end else begin
      done <= 1'b0;
      case (st)
        F_IDLE: if (start) begin
          st <= F_TEST; busy <= 1'b1; phase <= '0; r <= '0; c <= '0;
          nfaults <= '0; overflow <= 1'b0; spare_sel <= '0; repair_ok <= 1'b0;
          ncol_used <= '0; nrow_used <= '0; fit <= 1'b1; any_fail <= 1'b0;
          done_flag <= 1'b0;
          for (int i = 0; i < ROWS; i++) fail_map[i] <= '0;
        end
        F_TEST, F_RETEST: begin
          if (phase[0] && (m_rdata ^ mut_bit)) begin
            fail_map[r][c] <= 1'b1;
            any_fail <= 1'b1;
          end
          if (last_addr) begin
            r <= '0; c <= '0; phase <= phase + 1'b1;
            if (phase == 2'd3) begin
              if (st == F_TEST) st <= F_LIST;
              else begin
                st <= F_IDLE; busy <= 1'b0; done <= 1'b1; done_flag <= 1'b1;
                repair_ok <= fit && !(any_fail || (m_rdata ^ mut_bit));
              end
            end
          end else if (c == CA'(COLS - 1)) begin
            c <= '0; r <= r + 1'b1;
          end else c <= c + 1'b1;
        end
        F_LIST: begin
          if (fail_map[r][c]) begin
            if (32'(nfaults) < MAXF) begin
              f_row[nfaults[$clog2(MAXF)-1:0]] <= r; f_col[nfaults[$clog2(MAXF)-1:0]] <= c; nfaults <= nfaults + 1'b1;
            end else overflow <= 1'b1;
          end
          if (last_addr) begin r <= '0; c <= '0; st <= F_COVER; end
          else if (c == CA'(COLS - 1)) begin c <= '0; r <= r + 1'b1; end
          else c <= c + 1'b1;
        end
        F_COVER: st <= F_CWAIT;
        F_CWAIT: if (cv_done) begin
          spare_sel <= cv_ma; st <= F_REPAIR; k <= '0;
        end
        F_REPAIR: begin
          if (chosen && room) begin
            if (k_is_col) ncol_used <= ncol_used + 1'b1;
            else          nrow_used <= nrow_used + 1'b1;
          end
          if (k == KW'(NC - 1)) begin
            st <= F_RETEST; phase <= '0; r <= '0; c <= '0; any_fail <= 1'b0;
            fit <= !overflow && 32'(ccount) <= SC && 32'(rcount) <= SR;
          end else k <= k + 1'b1;
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  assign status = {16'(nfaults), 11'd0, overflow, repair_ok, done_flag, 1'b0, busy};
endmodule
