// lamp_array: the 4x4 multiprocessor matrix of sequencers.
//
// ROWS x COLS sequencers P[r][c]. Each one receives the m_d register of its
// eight neighbours (N, NE, E, SE, S, SW, W, NW); the indices wrap around at
// the edges, so the matrix is closed into a torus and every sequencer, edge
// ones included, has eight neighbours. The command-memory load port and the
// start pulse are broadcast to all sequencers; the data-window port reaches
// the one sequencer named by io_sel (index r*COLS+c), and io_rdata returns that
// sequencer's word. busy and done are gathered one bit per sequencer.
// The 4x4 size and the eight-neighbour wrap-around links follow the paper;
// the shared load bus and the broadcast start are this design's own.
// rst_n is an asynchronous reset; lint also sees it in the sequencers'
// assertion enable and reports it as synchronous there.
module lamp_array
  import lamp_pkg::*;
#(
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned N        = 16,
  parameter int unsigned W        = 16,
  parameter int unsigned CM_DEPTH = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cm_we,
  input  logic [$clog2(CM_DEPTH)-1:0]       cm_addr,
  input  instr_t                            cm_wdata,
  input  logic [$clog2(ROWS*COLS)-1:0]      io_sel,
  input  logic                              io_we,
  input  logic [$clog2(N+4)-1:0]            io_addr,
  input  logic [W-1:0]                      io_wdata,
  output logic [W-1:0]                      io_rdata,
  input  logic                              start,
  output logic [ROWS*COLS-1:0]              busy,
  output logic [ROWS*COLS-1:0]              done
);
  localparam int unsigned P = ROWS * COLS;

  logic [W-1:0] md  [P];
  logic [W-1:0] rd  [P];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned ID = r * COLS + c;
      localparam int unsigned RU = (r + ROWS - 1) % ROWS;   // row above
      localparam int unsigned RD = (r + 1) % ROWS;          // row below
      localparam int unsigned CL = (c + COLS - 1) % COLS;   // column left
      localparam int unsigned CR = (c + 1) % COLS;          // column right
      logic [7:0][W-1:0] nbr;

      always_comb begin
        nbr[DIR_N]  = md[RU * COLS + c];
        nbr[DIR_NE] = md[RU * COLS + CR];
        nbr[DIR_E]  = md[r  * COLS + CR];
        nbr[DIR_SE] = md[RD * COLS + CR];
        nbr[DIR_S]  = md[RD * COLS + c];
        nbr[DIR_SW] = md[RD * COLS + CL];
        nbr[DIR_W]  = md[r  * COLS + CL];
        nbr[DIR_NW] = md[RU * COLS + CL];
      end

      sequencer #(.N(N), .W(W), .CM_DEPTH(CM_DEPTH)) u_seq (
        .clk, .rst_n,
        .cm_we(cm_we), .cm_addr(cm_addr), .cm_wdata(cm_wdata),
        .io_we(io_we && io_sel == ($clog2(P))'(ID)), .io_addr(io_addr),
        .io_wdata(io_wdata), .io_rdata(rd[ID]),
        .start(start), .busy(busy[ID]), .done(done[ID]),
        .nbr_md(nbr), .md_out(md[ID]));
    end
  end

  assign io_rdata = rd[io_sel];
endmodule
