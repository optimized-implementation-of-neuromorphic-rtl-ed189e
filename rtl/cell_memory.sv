// cell_memory: the local memory units of the cells owned by one processing
// element. Each cell keeps the events it received since the last temporal
// reset, up to DEPTH of them.
//
// All cells share one RAM of CELLS*DEPTH entries (address cell*DEPTH + slot),
// written like a per-cell ring: each cell has a write slot and a fill level.
// An append writes the entry at the cell's write slot, advances the slot
// modulo DEPTH and raises the fill level up to DEPTH. When a cell is full the
// append overwrites its oldest entry and pulses `overflow`. Slots 0 .. fill-1
// of a cell are always valid, in no particular age order, which is all the
// time-surface scan needs. `clear` (the temporal reset) empties every cell in
// one cycle by zeroing the fill levels and write slots; the RAM is not wiped.
//
// Timing: reads are synchronous, rd_data holds the entry addressed in the
// previous cycle with rd_en high (single-cycle access, as in the paper's BRAM).
// A write and a read may happen in the same cycle; the read then sees the old
// contents. The fill level of `fill_cell` is a combinational output.
//
// The paper gives the memory's role (events of the last delta_t per cell,
// Memory <- Memory U e_i, reset every delta_t) and that it sits in BRAM with
// one-cycle access; the depth per cell and the overwrite-oldest policy on
// overflow are this design's choice.
module cell_memory
  import hats_pkg::*;
#(
  parameter int unsigned CELLS = 15,
  parameter int unsigned DEPTH = MEM_DEPTH_DEF,
  localparam int unsigned CW   = (CELLS > 1) ? $clog2(CELLS) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  // fill level of one cell
  input  logic [CW-1:0]               fill_cell,
  output logic [$clog2(DEPTH+1)-1:0]   fill,
  // read port
  input  logic                         rd_en,
  input  logic [CW-1:0]               rd_cell,
  input  logic [$clog2(DEPTH)-1:0]     rd_slot,
  output mem_entry_t                   rd_data,
  // append port
  input  logic                         wr_en,
  input  logic [CW-1:0]               wr_cell,
  input  mem_entry_t                   wr_data,
  output logic                         overflow
);
  localparam int unsigned SW = $clog2(DEPTH);
  localparam int unsigned FW = $clog2(DEPTH+1);
  localparam int unsigned AW = $clog2(CELLS*DEPTH);

  mem_entry_t     ram [CELLS*DEPTH];
  logic [FW-1:0]  fill_q [CELLS];
  logic [SW-1:0]  wslot_q [CELLS];

  function automatic logic [AW-1:0] addr(input logic [CW-1:0] c,
                                         input logic [SW-1:0] s);
    return AW'(32'(c) * DEPTH + 32'(s));
  endfunction

  assign fill     = fill_q[fill_cell];
  assign overflow = wr_en && (fill_q[wr_cell] == FW'(DEPTH));

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= ram[addr(rd_cell, rd_slot)];
    if (wr_en) ram[addr(wr_cell, wslot_q[wr_cell])] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CELLS; c++) begin
        fill_q[c]  <= '0;
        wslot_q[c] <= '0;
      end
    end else if (clear) begin
      for (int c = 0; c < CELLS; c++) begin
        fill_q[c]  <= '0;
        wslot_q[c] <= '0;
      end
    end else if (wr_en) begin
      wslot_q[wr_cell] <= (wslot_q[wr_cell] == SW'(DEPTH - 1)) ? '0 : wslot_q[wr_cell] + 1'b1;
      if (fill_q[wr_cell] != FW'(DEPTH)) fill_q[wr_cell] <= fill_q[wr_cell] + 1'b1;
    end
  end
endmodule
