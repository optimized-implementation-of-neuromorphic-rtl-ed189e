// axis_event_router: the AXI-Stream interconnect that hands every event to the
// processing element owning its cell.
//
// Cells are numbered column-major, l = (x / K) * CELLS_Y + (y / K), with
// CELLS_X = FRAME_M / K and CELLS_Y = FRAME_N / K. Cell l belongs to PE
// (l mod NUM_PE), so the cells are shared equally between the PEs and
// neighbouring cells land on different PEs. The router is combinational:
// the input is ready when the selected output is ready, and the event passes
// in the same cycle. Events whose pixel lies outside the whole cells of the
// frame are consumed and counted in `dropped`.
//
// Following the paper: the cells are divided equally between the PEs. This
// design's choice: the interleaved assignment, the cell numbering and the
// dropping of out-of-frame events.
module axis_event_router
  import hats_pkg::*;
#(
  parameter int unsigned NUM_PE  = NUM_PE_DEF,
  parameter int unsigned FRAME_M = FRAME_M_DEF,
  parameter int unsigned FRAME_N = FRAME_N_DEF,
  parameter int unsigned CELL_K  = CELL_K_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    s_tvalid,
  output logic                    s_tready,
  input  aer_t                    s_tdata,
  input  logic [TS_W-1:0]         s_tuser,
  output logic [NUM_PE-1:0]       m_tvalid,
  input  logic [NUM_PE-1:0]       m_tready,
  output aer_t                    m_tdata,
  output logic [TS_W-1:0]         m_tuser,
  output logic [31:0]             dropped
);
  localparam int unsigned CELLS_X = FRAME_M / CELL_K;
  localparam int unsigned CELLS_Y = FRAME_N / CELL_K;
  localparam int unsigned PE_W    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  aer_addr_t        a;
  logic             in_frame;
  int unsigned      cell_idx;
  logic [PE_W-1:0]  pe_sel;

  always_comb begin
    a        = aer_decode(s_tdata);
    in_frame = (32'(a.x) < CELLS_X * CELL_K) && (32'(a.y) < CELLS_Y * CELL_K);
    cell_idx = (32'(a.x) / CELL_K) * CELLS_Y + (32'(a.y) / CELL_K);
    pe_sel   = PE_W'(cell_idx % NUM_PE);
  end

  always_comb begin
    m_tvalid = '0;
    if (s_tvalid && in_frame) m_tvalid[pe_sel] = 1'b1;
    s_tready = in_frame ? m_tready[pe_sel] : 1'b1;
  end

  assign m_tdata = s_tdata;
  assign m_tuser = s_tuser;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         dropped <= '0;
    else if (s_tvalid && !in_frame)     dropped <= dropped + 1'b1;
  end
endmodule
