// lamp_top: logic associative multiprocessor (LAMP).
//
// A host loads a program into the command memory and the A-matrices and
// m-vectors of all sequencers into the data memory through a 32-bit register
// bus (see host_interface for the address map), then writes go. The control
// block copies the program into every sequencer, copies each sequencer's data
// window in, starts the 4x4 torus of sequencers, waits until all have halted
// and copies the windows back, where the host reads the results. job_done
// pulses at the end of a job.
// Next to the multiprocessor sits the infrastructure IP, which tests a
// 13 x 15 memory with spare rows and columns, chooses a covering set of spares
// and repairs the memory by readdressing; its start and status are in the
// same address space, and its memory port and defect model are brought out.
// The block set (interface, command memory, data memory, control block,
// multiprocessor, infrastructure IP) follows the paper; the buses between
// them are this design's own. All blocks share one clock and one
// asynchronous reset (lint also sees rst_n in the sequencers' assertion).
module lamp_top
  import lamp_pkg::*;
#(
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned N        = 16,
  parameter int unsigned W        = 16,
  parameter int unsigned CM_DEPTH = 32,
  parameter int unsigned M_ROWS   = 11,
  parameter int unsigned M_COLS   = 10,
  parameter int unsigned M_SR     = 2,
  parameter int unsigned M_SC     = 5,
  parameter int unsigned MAXF     = 16
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // host bus
  input  logic                                   wr,
  input  logic [11:0]                            addr,
  input  logic [31:0]                            wdata,
  output logic [31:0]                            rdata,
  output logic                                   job_done,
  // repaired memory: user port and defect model
  input  logic                                   mem_we,
  input  logic [$clog2(M_ROWS)-1:0]              mem_row,
  input  logic [$clog2(M_COLS)-1:0]              mem_col,
  input  logic                                   mem_wdata,
  output logic                                   mem_rdata,
  input  logic [M_ROWS+M_SR-1:0][M_COLS+M_SC-1:0] fault_en,
  input  logic [M_ROWS+M_SR-1:0][M_COLS+M_SC-1:0] fault_val,
  output logic                                   infra_done
);
  localparam int unsigned P        = ROWS * COLS;
  localparam int unsigned DM_DEPTH = P * (N + 4);

  // control block <-> rest
  logic                          go, c_busy;
  logic [31:0]                   run_cycles;
  logic [$clog2(CM_DEPTH)-1:0]   c_cm_raddr;
  logic [$clog2(DM_DEPTH)-1:0]   c_dm_addr;
  logic                          c_dm_we;
  logic [W-1:0]                  c_dm_wdata;
  // memories
  logic                          cm_we;
  logic [$clog2(CM_DEPTH)-1:0]   cm_waddr, cm_raddr;
  instr_t                        cm_wdata, cm_rdata;
  logic                          dm_we;
  logic [$clog2(DM_DEPTH)-1:0]   dm_addr;
  logic [W-1:0]                  dm_wdata, dm_rdata;
  // multiprocessor
  logic                          s_cm_we, s_io_we, s_start;
  logic [$clog2(CM_DEPTH)-1:0]   s_cm_addr;
  instr_t                        s_cm_wdata;
  logic [$clog2(P)-1:0]          s_sel;
  logic [$clog2(N+4)-1:0]        s_io_addr;
  logic [W-1:0]                  s_io_wdata, s_io_rdata;
  logic [P-1:0]                  s_busy, s_done;
  // infrastructure IP
  logic                          i_start, i_busy, i_overflow, i_ok;
  logic [$clog2(MAXF+1)-1:0]     i_nf;
  logic [M_COLS+M_ROWS-1:0]      i_sel;
  logic [31:0]                   i_status;

  host_interface #(.CM_DEPTH(CM_DEPTH), .DM_DEPTH(DM_DEPTH), .W(W)) u_if (
    .clk, .rst_n, .wr, .addr, .wdata, .rdata,
    .go, .ctrl_busy(c_busy), .ctrl_done(job_done), .run_cycles,
    .ctrl_cm_raddr(c_cm_raddr), .ctrl_dm_addr(c_dm_addr), .ctrl_dm_we(c_dm_we),
    .ctrl_dm_wdata(c_dm_wdata),
    .cm_we, .cm_waddr, .cm_wdata, .cm_raddr, .cm_rdata,
    .dm_we, .dm_addr, .dm_wdata, .dm_rdata,
    .infra_start(i_start), .infra_status(i_status));

  command_memory #(.DEPTH(CM_DEPTH)) u_cm (
    .clk, .we(cm_we), .waddr(cm_waddr), .wdata(cm_wdata), .raddr(cm_raddr), .rdata(cm_rdata));

  data_memory #(.DEPTH(DM_DEPTH), .W(W)) u_dm (
    .clk, .we(dm_we), .addr(dm_addr), .wdata(dm_wdata), .rdata(dm_rdata));

  control_block #(.P(P), .N(N), .W(W), .CM_DEPTH(CM_DEPTH), .DM_DEPTH(DM_DEPTH)) u_ctrl (
    .clk, .rst_n, .go, .busy(c_busy), .done(job_done), .run_cycles,
    .cm_raddr(c_cm_raddr), .cm_rdata(cm_rdata),
    .dm_addr(c_dm_addr), .dm_we(c_dm_we), .dm_wdata(c_dm_wdata), .dm_rdata(dm_rdata),
    .seq_cm_we(s_cm_we), .seq_cm_addr(s_cm_addr), .seq_cm_wdata(s_cm_wdata),
    .seq_sel(s_sel), .seq_io_we(s_io_we), .seq_io_addr(s_io_addr),
    .seq_io_wdata(s_io_wdata), .seq_io_rdata(s_io_rdata), .seq_start(s_start),
    .seq_busy(s_busy));

  lamp_array #(.ROWS(ROWS), .COLS(COLS), .N(N), .W(W), .CM_DEPTH(CM_DEPTH)) u_mp (
    .clk, .rst_n, .cm_we(s_cm_we), .cm_addr(s_cm_addr), .cm_wdata(s_cm_wdata),
    .io_sel(s_sel), .io_we(s_io_we), .io_addr(s_io_addr), .io_wdata(s_io_wdata),
    .io_rdata(s_io_rdata), .start(s_start), .busy(s_busy), .done(s_done));

  infra_ip #(.ROWS(M_ROWS), .COLS(M_COLS), .SR(M_SR), .SC(M_SC), .MAXF(MAXF)) u_infra (
    .clk, .rst_n, .start(i_start), .busy(i_busy), .done(infra_done), .nfaults(i_nf),
    .overflow(i_overflow), .spare_sel(i_sel), .repair_ok(i_ok), .status(i_status),
    .u_we(mem_we), .u_row(mem_row), .u_col(mem_col), .u_wdata(mem_wdata),
    .u_rdata(mem_rdata), .fault_en, .fault_val);

  // status bits not used at this level
  logic unused;
  assign unused = ^{s_done, i_busy, i_overflow, i_ok, i_nf, i_sel};
endmodule
