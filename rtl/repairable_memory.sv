// repairable_memory: bit memory with spare rows and columns and a repair
// address decoder (the unit under test, AD and SM of the self-repair flow).
//
// The cell array has (ROWS+SR) x (COLS+SC) one-bit cells: the main area is
// ROWS x COLS, SR spare rows lie below it and SC spare columns to its right
// (13 x 15 with 2 spare rows and 5 spare columns by default). Users address
// only the main area, with 0-based row and column. The address decoder holds
// SR row-remap and SC column-remap entries; an access to a remapped row goes
// to the spare row of that entry, an access to a remapped column to the spare
// column of that entry (both, if both are remapped). Entries are written
// through the map port, one per clock.
// Writes take effect at the clock edge; reads are combinational.
// fault_en / fault_val model manufacturing defects for test: a cell whose
// fault_en bit is 1 reads as its fault_val bit (stuck-at), whatever was
// written. They are ordinary inputs and are tied to 0 in a defect-free use.
// The geometry and the repair by readdressing follow the paper; the remap
// table form and the fault model are this design's own.
module repairable_memory #(
  parameter int unsigned ROWS = 11,
  parameter int unsigned COLS = 10,
  parameter int unsigned SR   = 2,
  parameter int unsigned SC   = 5
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // user / test port
  input  logic                                 we,
  input  logic [$clog2(ROWS)-1:0]              row,
  input  logic [$clog2(COLS)-1:0]              col,
  input  logic                                 wdata,
  output logic                                 rdata,
  // address decoder programming
  input  logic                                 map_we,
  input  logic                                 map_clear,
  input  logic                                 map_is_col,
  input  logic [$clog2(SC > SR ? SC : SR)-1:0] map_idx,
  input  logic [$clog2(COLS > ROWS ? COLS : ROWS)-1:0] map_addr,
  // defect model
  input  logic [ROWS+SR-1:0][COLS+SC-1:0]      fault_en,
  input  logic [ROWS+SR-1:0][COLS+SC-1:0]      fault_val
);
  localparam int unsigned PR = ROWS + SR;
  localparam int unsigned PC = COLS + SC;
  localparam int unsigned AW = $clog2(COLS > ROWS ? COLS : ROWS);

  logic [PC-1:0]          cells [PR];
  logic                   rmap_v [SR];
  logic [AW-1:0]          rmap_a [SR];
  logic                   cmap_v [SC];
  logic [AW-1:0]          cmap_a [SC];
  logic [$clog2(PR)-1:0]  prow;
  logic [$clog2(PC)-1:0]  pcol;

  // address decoder
  always_comb begin
    prow = ($clog2(PR))'(row);
    pcol = ($clog2(PC))'(col);
    for (int k = 0; k < SR; k++)
      if (rmap_v[k] && rmap_a[k] == AW'(row)) prow = ($clog2(PR))'(ROWS + k);
    for (int k = 0; k < SC; k++)
      if (cmap_v[k] && cmap_a[k] == AW'(col)) pcol = ($clog2(PC))'(COLS + k);
  end

  always_ff @(posedge clk) begin
    if (we) cells[prow][pcol] <= wdata;
  end

  assign rdata = fault_en[prow][pcol] ? fault_val[prow][pcol] : cells[prow][pcol];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < SR; k++) begin rmap_v[k] <= 1'b0; rmap_a[k] <= '0; end
      for (int k = 0; k < SC; k++) begin cmap_v[k] <= 1'b0; cmap_a[k] <= '0; end
    end else if (map_clear) begin
      for (int k = 0; k < SR; k++) rmap_v[k] <= 1'b0;
      for (int k = 0; k < SC; k++) cmap_v[k] <= 1'b0;
    end else if (map_we) begin
      for (int k = 0; k < SC; k++)
        if (map_is_col && 32'(map_idx) == k) begin cmap_v[k] <= 1'b1; cmap_a[k] <= map_addr; end
      for (int k = 0; k < SR; k++)
        if (!map_is_col && 32'(map_idx) == k) begin rmap_v[k] <= 1'b1; rmap_a[k] <= map_addr; end
    end
  end
endmodule
