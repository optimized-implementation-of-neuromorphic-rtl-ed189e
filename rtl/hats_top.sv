// hats_top: programmable-logic part of the CWTS/HATS event classifier SoC.
//
// Events arrive from the processor's DMA as one AXI-Stream: a 24-bit AER word
// in TDATA ([6:0] x, [13:7] y, [14] polarity) and a microsecond timestamp in
// TUSER. The stream router sends each event to the PE that owns its cell
// (cell l goes to PE l mod NUM_PE); an AXI-Stream data FIFO in front of each
// PE absorbs short bursts while the PE is busy. Each PE keeps the cell
// memories, SVM weights and partial sums of its own cells. The processor
// reaches every PE through an AXI-Lite interconnect (PE p at byte address
// p * 0x10000): it loads the weights, issues the temporal reset at the end
// of each delta_t window, and reads the partial sums and event counts, which
// it normalises and turns into a class decision in software.
//
// Ports are plain signals and structs: the AXI-Stream slave, the AXI-Lite
// slave (axil_req_t / axil_resp_t from hats_pkg) and a count of events that
// fell outside the frame. There is no other output; results are read over
// AXI-Lite.
//
// Following the paper's SoC diagram and text: DMA-fed AXI-Stream with a data
// FIFO per PE, NUM_PE parallel PEs sharing the cells equally, an AXI-Lite
// interconnect to the PEs, 100 MHz target clock. This design's choices: the
// cell interleave, the FIFO depth and the address map.
module hats_top
  import hats_pkg::*;
#(
  parameter int unsigned     NUM_PE      = NUM_PE_DEF,
  parameter int unsigned     FRAME_M     = FRAME_M_DEF,
  parameter int unsigned     FRAME_N     = FRAME_N_DEF,
  parameter int unsigned     CELL_K      = CELL_K_DEF,
  parameter int unsigned     RHO         = RHO_DEF,
  parameter longint unsigned DELTA_T_US  = DELTA_T_US_DEF,
  parameter longint unsigned TAU_US      = TAU_US_DEF,
  parameter int unsigned     MEM_DEPTH   = MEM_DEPTH_DEF,
  parameter int unsigned     NUM_CLASSES = NUM_CLASSES_DEF,
  parameter int unsigned     MAC_ITERS   = MAC_ITERS_DEF,
  parameter int unsigned     TOTAL_W     = TOTAL_W_DEF,
  parameter int unsigned     FIFO_DEPTH  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // event stream from the DMA
  input  logic            s_axis_tvalid,
  output logic            s_axis_tready,
  input  aer_t            s_axis_tdata,
  input  logic [TS_W-1:0] s_axis_tuser,
  // AXI-Lite from the processor
  input  axil_req_t       s_axil_req,
  output axil_resp_t      s_axil_resp,
  // events outside the frame
  output logic [31:0]     dropped_events
);
  logic [NUM_PE-1:0] r_tvalid, r_tready;
  aer_t              r_tdata;
  logic [TS_W-1:0]   r_tuser;
  axil_req_t         pe_req  [NUM_PE];
  axil_resp_t        pe_resp [NUM_PE];

  axis_event_router #(.NUM_PE(NUM_PE), .FRAME_M(FRAME_M), .FRAME_N(FRAME_N),
                      .CELL_K(CELL_K)) u_router (
    .clk, .rst_n,
    .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .s_tdata(s_axis_tdata), .s_tuser(s_axis_tuser),
    .m_tvalid(r_tvalid), .m_tready(r_tready), .m_tdata(r_tdata), .m_tuser(r_tuser),
    .dropped(dropped_events)
  );

  axil_interconnect #(.NUM_PE(NUM_PE)) u_axil (
    .clk, .rst_n, .s_req(s_axil_req), .s_resp(s_axil_resp),
    .m_req(pe_req), .m_resp(pe_resp)
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic            f_tvalid, f_tready;
    aer_t            f_tdata;
    logic [TS_W-1:0] f_tuser;
    logic [$clog2(FIFO_DEPTH+1)-1:0] f_level;

    axis_event_fifo #(.DEPTH(FIFO_DEPTH), .DW(AER_W), .UW(TS_W)) u_fifo (
      .clk, .rst_n,
      .s_tvalid(r_tvalid[p]), .s_tready(r_tready[p]), .s_tdata(r_tdata), .s_tuser(r_tuser),
      .m_tvalid(f_tvalid), .m_tready(f_tready), .m_tdata(f_tdata), .m_tuser(f_tuser),
      .level(f_level)
    );

    hats_pe #(.PE_ID(p), .NUM_PE(NUM_PE), .FRAME_M(FRAME_M), .FRAME_N(FRAME_N),
              .CELL_K(CELL_K), .RHO(RHO), .DELTA_T_US(DELTA_T_US), .TAU_US(TAU_US),
              .MEM_DEPTH(MEM_DEPTH), .NUM_CLASSES(NUM_CLASSES), .MAC_ITERS(MAC_ITERS),
              .TOTAL_W(TOTAL_W)) u_pe (
      .clk, .rst_n,
      .s_tvalid(f_tvalid), .s_tready(f_tready), .s_tdata(f_tdata), .s_tuser(f_tuser),
      .axil_req(pe_req[p]), .axil_resp(pe_resp[p])
    );
  end
endmodule
