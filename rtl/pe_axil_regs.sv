// pe_axil_regs: AXI-Lite slave of one processing element. Through it the
// processor loads the SVM weights, issues the temporal reset, watches the PE
// and reads back the partial sums and event counts.
//
// Register map (byte offsets in the PE's 64 KiB window, 32-bit registers):
//   0x0000 CTRL      W  bit 0 = 1: request a temporal reset
//   0x0004 STATUS    R  bit 0 busy, bit 1 reset pending
//   0x0008 EVENTS    R  events processed since power-on reset
//   0x000C OVERFLOW  R  cell-memory overwrites since power-on reset
//   0x0010 PARAMS    R  [15:0] cells of this PE, [31:16] classes
//   0x1000 + 4*(c*CLASSES + k)  R  partial sum of local cell c, class k
//                                  (sign-extended <TOTAL_W,12>)
//   0x2000 + 4*c                R  Count of local cell c
//   0x8000 + 4*w                W  SVM weight with flat index w (low TOTAL_W
//                                  bits, see svm_weight_mem)
// Unmapped reads return 0; all responses are OKAY.
//
// Timing: a write is taken when AW and W are both valid and no B response is
// waiting; awready and wready rise together in that cycle and bvalid follows
// one cycle later. A read is taken when no R response is waiting; rvalid and
// rdata follow one cycle later. The partial-sum and count read address is
// decoded combinationally from araddr, so the data comes from the cycle the
// read is taken.
//
// The paper says the partial sums go back to the processor over a
// Slave-AXI-Lite interface; the register map, the weight loading path and the
// reset register are this design's choice.
module pe_axil_regs
  import hats_pkg::*;
#(
  parameter int unsigned CELLS       = 15,
  parameter int unsigned NUM_CLASSES = NUM_CLASSES_DEF,
  parameter int unsigned RHO         = RHO_DEF,
  parameter int unsigned TOTAL_W     = TOTAL_W_DEF,
  localparam int unsigned BINS       = (2*RHO+1) * (2*RHO+1),
  localparam int unsigned NW         = CELLS * 2 * NUM_CLASSES * BINS,
  localparam int unsigned CW         = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned KW         = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  axil_req_t                 req,
  output axil_resp_t                resp,
  // control
  output logic                      treset_req,
  // weight load
  output logic                      w_wr_en,
  output logic [$clog2(NW)-1:0]     w_wr_index,
  output logic signed [TOTAL_W-1:0] w_wr_data,
  // partial sum / count read
  output logic [CW-1:0]             rd_cell,
  output logic [KW-1:0]             rd_class,
  input  logic signed [TOTAL_W-1:0] rd_psum,
  input  logic [31:0]               rd_count,
  // status
  input  logic                      st_busy,
  input  logic                      st_pending,
  input  logic [31:0]               st_events,
  input  logic [31:0]               st_overflow
);
  logic                 bvalid_q, rvalid_q;
  logic [31:0]          rdata_q;
  logic                 wr_take, rd_take;
  logic [PE_ADDR_W-1:0] wa, ra;
  logic [PE_ADDR_W-3:0] widx, ridx;

  assign wa      = req.awaddr[PE_ADDR_W-1:0];
  assign ra      = req.araddr[PE_ADDR_W-1:0];
  assign wr_take = req.awvalid && req.wvalid && !bvalid_q;
  assign rd_take = req.arvalid && !rvalid_q;

  always_comb begin
    resp         = '0;
    resp.awready = wr_take;
    resp.wready  = wr_take;
    resp.bvalid  = bvalid_q;
    resp.arready = rd_take;
    resp.rvalid  = rvalid_q;
    resp.rdata   = rdata_q;
  end

  // write side
  always_comb begin
    widx       = (PE_ADDR_W-2)'((wa - WEIGHT_BASE) >> 2);
    treset_req = wr_take && (wa == REG_CTRL) && req.wdata[0];
    w_wr_en    = wr_take && (wa >= WEIGHT_BASE) && (32'(widx) < NW);
    w_wr_index = $clog2(NW)'(widx);
    w_wr_data  = req.wdata[TOTAL_W-1:0];
  end

  // read side: address decode for the partial-sum / count port
  always_comb begin
    rd_cell  = '0;
    rd_class = '0;
    if (ra >= PSUM_BASE && ra < COUNT_BASE) begin
      ridx     = (PE_ADDR_W-2)'((ra - PSUM_BASE) >> 2);
      rd_cell  = CW'(32'(ridx) / NUM_CLASSES);
      rd_class = KW'(32'(ridx) % NUM_CLASSES);
    end else begin
      ridx     = (PE_ADDR_W-2)'((ra - COUNT_BASE) >> 2);
      rd_cell  = CW'(ridx);
    end
  end

  function automatic logic [31:0] read_mux(input logic [PE_ADDR_W-1:0] a,
                                           input logic [PE_ADDR_W-3:0] i);
    if (a == REG_STATUS)   return {30'd0, st_pending, st_busy};
    if (a == REG_EVENTS)   return st_events;
    if (a == REG_OVERFLOW) return st_overflow;
    if (a == REG_PARAMS)   return {16'(NUM_CLASSES), 16'(CELLS)};
    if (a >= PSUM_BASE && a < COUNT_BASE && 32'(i) < CELLS * NUM_CLASSES)
      return 32'(signed'(rd_psum));
    if (a >= COUNT_BASE && a < WEIGHT_BASE && 32'(i) < CELLS)
      return rd_count;
    return '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (wr_take)                       bvalid_q <= 1'b1;
      else if (bvalid_q && req.bready)   bvalid_q <= 1'b0;
      if (rd_take) begin
        rvalid_q <= 1'b1;
        rdata_q  <= read_mux(ra, ridx);
      end else if (rvalid_q && req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             resp.bvalid && !req.bready |=> resp.bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             resp.rvalid && !req.rready |=> resp.rvalid && $stable(resp.rdata));
endmodule
