// host_interface: the multiprocessor's port to the outside world.
//
// A simple single-cycle register bus: on wr the word wdata is written to
// address addr; on every cycle rdata returns the word at addr
// (combinationally). The address space is split by addr[11:10]:
//   0  command memory, word addr[9:0] (instruction in wdata[21:0]; the upper
//      data bits are ignored)
//   1  data memory, word addr[9:0]
//   2  control: write reg 0 bit 0 = go; read reg 0 = {done_flag, busy},
//      reg 1 = run_cycles of the last job
//   3  infrastructure IP: write reg 0 bit 0 = test-and-repair start; read
//      reg 0 = infra status word
// While the control block is busy it owns both memories and host writes to
// them are ignored; reads then see what the control block addresses.
// done_flag is set when a job ends and cleared by the next go.
// The paper states only that the interface exchanges data and loads the
// memories; the bus, map and arbitration are this design's own.
module host_interface
  import lamp_pkg::*;
#(
  parameter int unsigned CM_DEPTH = 32,
  parameter int unsigned DM_DEPTH = 320,
  parameter int unsigned W        = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host bus
  input  logic                          wr,
  input  logic [11:0]                   addr,
  input  logic [31:0]                   wdata,
  output logic [31:0]                   rdata,
  // control block side
  output logic                          go,
  input  logic                          ctrl_busy,
  input  logic                          ctrl_done,
  input  logic [31:0]                   run_cycles,
  input  logic [$clog2(CM_DEPTH)-1:0]   ctrl_cm_raddr,
  input  logic [$clog2(DM_DEPTH)-1:0]   ctrl_dm_addr,
  input  logic                          ctrl_dm_we,
  input  logic [W-1:0]                  ctrl_dm_wdata,
  // memories
  output logic                          cm_we,
  output logic [$clog2(CM_DEPTH)-1:0]   cm_waddr,
  output instr_t                        cm_wdata,
  output logic [$clog2(CM_DEPTH)-1:0]   cm_raddr,
  input  instr_t                        cm_rdata,
  output logic                          dm_we,
  output logic [$clog2(DM_DEPTH)-1:0]   dm_addr,
  output logic [W-1:0]                  dm_wdata,
  input  logic [W-1:0]                  dm_rdata,
  // infrastructure IP
  output logic                          infra_start,
  input  logic [31:0]                   infra_status
);
  logic [1:0] region;
  logic [9:0] off;
  logic       done_flag;

  assign region = addr[11:10];
  assign off    = addr[9:0];

  always_comb begin
    go          = wr && region == 2'd2 && off == 10'd0 && wdata[0] && !ctrl_busy;
    infra_start = wr && region == 2'd3 && off == 10'd0 && wdata[0];
    cm_we       = wr && region == 2'd0 && !ctrl_busy;
    cm_waddr    = off[$clog2(CM_DEPTH)-1:0];
    cm_wdata    = instr_t'(wdata[INSTR_W-1:0]);
    cm_raddr    = ctrl_busy ? ctrl_cm_raddr : off[$clog2(CM_DEPTH)-1:0];
    if (ctrl_busy) begin
      dm_we    = ctrl_dm_we;
      dm_addr  = ctrl_dm_addr;
      dm_wdata = ctrl_dm_wdata;
    end else begin
      dm_we    = wr && region == 2'd1;
      dm_addr  = off[$clog2(DM_DEPTH)-1:0];
      dm_wdata = wdata[W-1:0];
    end
    case (region)
      2'd0:    rdata = 32'(cm_rdata);
      2'd1:    rdata = 32'(dm_rdata);
      2'd2:    rdata = off[0] ? run_cycles : {30'd0, done_flag, ctrl_busy};
      default: rdata = infra_status;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         done_flag <= 1'b0;
    else if (go)        done_flag <= 1'b0;
    else if (ctrl_done) done_flag <= 1'b1;
  end
endmodule
