// control_block: starts and synchronises the multiprocessor.
//
// On a go pulse it runs one complete job in five phases:
//   LOADCM  copies the CM_DEPTH words of the global command memory into the
//           command memory of every sequencer (broadcast), one word per clock;
//   LOADDT  copies the data window of each of the P sequencers (N rows of A,
//           then m_a..m_d) from the global data memory, one word per clock;
//   START   pulses start to all sequencers at once;
//   RUN     waits until no sequencer is busy any more, counting the clocks;
//   STORE   copies every window back into the data memory.
// busy is high from go to the end of STORE; done pulses once at the end.
// run_cycles holds the length of the last RUN phase. The address of word w of
// sequencer p is p*(N+4)+w; it is kept in a running counter.
// The paper gives only the block's duty (initiate command execution and
// synchronise all components); this schedule is this design's own.
module control_block
  import lamp_pkg::*;
#(
  parameter int unsigned P        = 16,
  parameter int unsigned N        = 16,
  parameter int unsigned W        = 16,
  parameter int unsigned CM_DEPTH = 32,
  parameter int unsigned DM_DEPTH = P * (N + 4)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          go,
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   run_cycles,
  // global command memory read
  output logic [$clog2(CM_DEPTH)-1:0]   cm_raddr,
  input  instr_t                        cm_rdata,
  // global data memory
  output logic [$clog2(DM_DEPTH)-1:0]   dm_addr,
  output logic                          dm_we,
  output logic [W-1:0]                  dm_wdata,
  input  logic [W-1:0]                  dm_rdata,
  // multiprocessor
  output logic                          seq_cm_we,
  output logic [$clog2(CM_DEPTH)-1:0]   seq_cm_addr,
  output instr_t                        seq_cm_wdata,
  output logic [$clog2(P)-1:0]          seq_sel,
  output logic                          seq_io_we,
  output logic [$clog2(N+4)-1:0]        seq_io_addr,
  output logic [W-1:0]                  seq_io_wdata,
  input  logic [W-1:0]                  seq_io_rdata,
  output logic                          seq_start,
  input  logic [P-1:0]                  seq_busy
);
  typedef enum logic [2:0] {C_IDLE, C_LOADCM, C_LOADDT, C_START, C_RUN, C_STORE} cstate_e;

  cstate_e                      st;
  logic [$clog2(CM_DEPTH)-1:0]  ci;
  logic [$clog2(P)-1:0]         pi;
  logic [$clog2(N+4)-1:0]       wi;
  logic [$clog2(DM_DEPTH)-1:0]  ai;
  logic                         started;
  logic                         last_word;

  assign last_word = (wi == ($clog2(N+4))'(N + 3));

  // combinational bus drive
  always_comb begin
    cm_raddr     = ci;
    seq_cm_we    = (st == C_LOADCM);
    seq_cm_addr  = ci;
    seq_cm_wdata = cm_rdata;
    dm_addr      = ai;
    dm_we        = (st == C_STORE);
    dm_wdata     = seq_io_rdata;
    seq_sel      = pi;
    seq_io_addr  = wi;
    seq_io_we    = (st == C_LOADDT);
    seq_io_wdata = dm_rdata;
    seq_start    = (st == C_START);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ci <= '0; pi <= '0; wi <= '0; ai <= '0; busy <= 1'b0;
      done <= 1'b0; run_cycles <= '0; started <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        C_IDLE: if (go) begin
          st <= C_LOADCM; busy <= 1'b1; ci <= '0;
        end
        C_LOADCM: begin
          if (ci == ($clog2(CM_DEPTH))'(CM_DEPTH - 1)) begin
            st <= C_LOADDT; pi <= '0; wi <= '0; ai <= '0;
          end else ci <= ci + 1'b1;
        end
        C_LOADDT, C_STORE: begin
          ai <= ai + 1'b1;
          if (last_word) begin
            wi <= '0;
            if (pi == ($clog2(P))'(P - 1)) begin
              pi <= '0; ai <= '0;
              if (st == C_LOADDT) st <= C_START;
              else begin st <= C_IDLE; busy <= 1'b0; done <= 1'b1; end
            end else pi <= pi + 1'b1;
          end else wi <= wi + 1'b1;
        end
        C_START: begin
          st <= C_RUN; run_cycles <= '0; started <= 1'b0;
        end
        C_RUN: begin
          run_cycles <= run_cycles + 1;
          if (|seq_busy) started <= 1'b1;
          if (started && !(|seq_busy)) begin
            st <= C_STORE; pi <= '0; wi <= '0; ai <= '0;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
