// hats_pkg: types, constants and helper functions shared by the CWTS/HATS
// event classifier.
//
// The design classifies the event stream of an asynchronous time-based image
// sensor. The frame of FRAME_M x FRAME_N pixels is cut into cells of
// CELL_K x CELL_K pixels. For each event the processing element (PE) owning
// its cell builds a (2*RHO+1)^2 local time surface from the events stored in
// that cell's memory, multiplies it with the cell's SVM weights and adds the
// result to the cell's partial sum.
//
// Defaults that come from the paper: 120x100 frame, K = 10, rho = 3,
// delta_t = 100 ms, tau = 10^6 ms, 8 PEs, <24,12> fixed point, the MAC done in
// 2 iterations of 11 cycles, microsecond timestamps, 24-bit AER words.
// This design's own choices: the AER bit layout, the timestamp side band, the
// cell-to-PE assignment, the cell memory depth, the register map and the
// reciprocal used for the linear kernel.
package hats_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FRAME_M_DEF   = 120;     // pixels along x
  localparam int unsigned FRAME_N_DEF   = 100;     // pixels along y
  localparam int unsigned CELL_K_DEF    = 10;      // cell side K
  localparam int unsigned RHO_DEF       = 3;       // spatial window rho
  localparam int unsigned NUM_PE_DEF    = 8;       // processing elements
  localparam int unsigned MEM_DEPTH_DEF = 256;     // stored events per cell
  localparam int unsigned NUM_CLASSES_DEF = 1;     // weight vectors (binary SVM)
  localparam int unsigned MAC_ITERS_DEF = 2;       // MAC iterations per event
  localparam int unsigned MAC_ITER_CYCLES = 11;    // cycles per MAC iteration

  // ---------------------------------------------------------------- time
  localparam longint unsigned DELTA_T_US_DEF = 100_000;        // 100 ms
  localparam longint unsigned TAU_US_DEF     = 1_000_000_000;  // 10^6 ms

  // ---------------------------------------------------------------- number format <TOTAL_W, INT_W>
  localparam int unsigned TOTAL_W_DEF = 24;
  localparam int unsigned INT_W       = 12;

  // ---------------------------------------------------------------- AER word
  // 24-bit AER word: [6:0] x, [13:7] y, [14] polarity (1 = ON), [23:15] zero.
  localparam int unsigned AER_W  = 24;
  localparam int unsigned COORD_W = 7;
  // Timestamp in microseconds, carried in the stream's TUSER side band.
  localparam int unsigned TS_W   = 32;
  // Timestamp width kept in the cell memory: ages below 2^17 us = 131 ms.
  localparam int unsigned TSM_W  = 17;
  // Local (in-cell) coordinate width: cells up to 16 x 16 pixels.
  localparam int unsigned LC_W   = 4;

  typedef logic [AER_W-1:0] aer_t;

  typedef struct packed {
    logic               pol;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } aer_addr_t;

  function automatic aer_addr_t aer_decode(input aer_t w);
    return aer_addr_t'(w[2*COORD_W:0]);
  endfunction

  function automatic aer_t aer_encode(input logic pol, input int unsigned x,
                                      input int unsigned y);
    aer_t w;
    w = '0;
    w[COORD_W-1:0]         = COORD_W'(x);
    w[2*COORD_W-1:COORD_W] = COORD_W'(y);
    w[2*COORD_W]           = pol;
    return w;
  endfunction

  // One entry of a cell memory: the event's position inside its cell,
  // its polarity and the low TSM_W bits of its timestamp.
  typedef struct packed {
    logic             pol;
    logic [LC_W-1:0]  ly;
    logic [LC_W-1:0]  lx;
    logic [TSM_W-1:0] t;
  } mem_entry_t;

  // ---------------------------------------------------------------- AXI-Lite
  localparam int unsigned AXIL_ADDR_W = 20;   // 16 PE windows of 64 KiB
  localparam int unsigned PE_ADDR_W   = 16;   // byte address inside one PE

  typedef struct packed {
    logic                   awvalid;
    logic [AXIL_ADDR_W-1:0] awaddr;
    logic                   wvalid;
    logic [31:0]            wdata;
    logic [3:0]             wstrb;
    logic                   bready;
    logic                   arvalid;
    logic [AXIL_ADDR_W-1:0] araddr;
    logic                   rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_resp_t;

  // PE register map (byte offsets inside the PE window).
  localparam logic [PE_ADDR_W-1:0] REG_CTRL     = 16'h0000; // W: bit0 temporal reset
  localparam logic [PE_ADDR_W-1:0] REG_STATUS   = 16'h0004; // R: bit0 busy, bit1 reset pending
  localparam logic [PE_ADDR_W-1:0] REG_EVENTS   = 16'h0008; // R: events processed
  localparam logic [PE_ADDR_W-1:0] REG_OVERFLOW = 16'h000C; // R: cell-memory overwrites
  localparam logic [PE_ADDR_W-1:0] REG_PARAMS   = 16'h0010; // R: {classes, cells}
  localparam logic [PE_ADDR_W-1:0] PSUM_BASE    = 16'h1000; // R: psum[cell*CLASSES+k]
  localparam logic [PE_ADDR_W-1:0] COUNT_BASE   = 16'h2000; // R: Count[cell]
  localparam logic [PE_ADDR_W-1:0] WEIGHT_BASE  = 16'h8000; // W: weight[((cell*2+pol)*CLASSES+k)*BINS+z]

  // ---------------------------------------------------------------- helpers
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Reciprocal of tau used by the linear kernel:
  // decay(dt) = 2^FRAC - ((dt * RECIP) >> 32), RECIP = floor(2^(FRAC+32) / tau).
  function automatic longint unsigned tau_recip(input longint unsigned tau_us,
                                                input int unsigned frac_w);
    return (64'd1 << (frac_w + 32)) / tau_us;
  endfunction

endpackage
