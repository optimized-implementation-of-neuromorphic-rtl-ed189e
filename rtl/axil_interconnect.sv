// axil_interconnect: one AXI-Lite master (the processor) to NUM_PE AXI-Lite
// slaves (the processing elements).
//
// Each PE owns a 64 KiB window: bits [PE_ADDR_W +: PE_W] of the address pick
// the PE. Writes and reads are handled by two independent two-state machines
// that allow one outstanding transaction per direction. A write is forwarded
// once both AW and W are valid, and the slave must accept the two in the same
// cycle (the PE register block does); the B response is then taken from the
// same slave. A read forwards AR, then returns R from the slave that took it.
// An address beyond the last PE is answered by the interconnect itself with
// DECERR (and read data 0).
//
// The paper shows the interconnect and the S-axilite links only as a block in
// the SoC diagram; the window size, the one-outstanding policy and the decode
// error are this design's choices.
module axil_interconnect
  import hats_pkg::*;
#(
  parameter int unsigned NUM_PE = NUM_PE_DEF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  s_req,
  output axil_resp_t s_resp,
  output axil_req_t  m_req  [NUM_PE],
  input  axil_resp_t m_resp [NUM_PE]
);
  localparam int unsigned PE_W  = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int unsigned SEL_W = AXIL_ADDR_W - PE_ADDR_W;

  typedef enum logic {W_ADDR, W_RESP} wstate_t;
  typedef enum logic {R_ADDR, R_RESP} rstate_t;

  wstate_t          wst;
  rstate_t          rstate;
  logic [PE_W-1:0]  wsel_q, rsel_q;
  logic             werr_q, rerr_q;
  logic [SEL_W-1:0] aw_pe, ar_pe;
  logic             aw_ok, ar_ok;

  assign aw_pe = s_req.awaddr[AXIL_ADDR_W-1:PE_ADDR_W];
  assign ar_pe = s_req.araddr[AXIL_ADDR_W-1:PE_ADDR_W];
  assign aw_ok = (32'(aw_pe) < NUM_PE);
  assign ar_ok = (32'(ar_pe) < NUM_PE);

  always_comb begin
    s_resp = '0;
    for (int i = 0; i < NUM_PE; i++) begin
      m_req[i]        = s_req;
      m_req[i].awvalid = 1'b0;
      m_req[i].wvalid  = 1'b0;
      m_req[i].bready  = 1'b0;
      m_req[i].arvalid = 1'b0;
      m_req[i].rready  = 1'b0;
    end
    // write address and data
    if (wst == W_ADDR && s_req.awvalid && s_req.wvalid) begin
      if (aw_ok) begin
        m_req[PE_W'(aw_pe)].awvalid = 1'b1;
        m_req[PE_W'(aw_pe)].wvalid  = 1'b1;
        s_resp.awready = m_resp[PE_W'(aw_pe)].awready;
        s_resp.wready  = m_resp[PE_W'(aw_pe)].wready;
      end else begin
        s_resp.awready = 1'b1;
        s_resp.wready  = 1'b1;
      end
    end
    // write response
    if (wst == W_RESP) begin
      if (werr_q) begin
        s_resp.bvalid = 1'b1;
        s_resp.bresp  = 2'b11;
      end else begin
        m_req[wsel_q].bready = s_req.bready;
        s_resp.bvalid = m_resp[wsel_q].bvalid;
        s_resp.bresp  = m_resp[wsel_q].bresp;
      end
    end
    // read address
    if (rstate == R_ADDR && s_req.arvalid) begin
      if (ar_ok) begin
        m_req[PE_W'(ar_pe)].arvalid = 1'b1;
        s_resp.arready = m_resp[PE_W'(ar_pe)].arready;
      end else begin
        s_resp.arready = 1'b1;
      end
    end
    // read data
    if (rstate == R_RESP) begin
      if (rerr_q) begin
        s_resp.rvalid = 1'b1;
        s_resp.rresp  = 2'b11;
      end else begin
        m_req[rsel_q].rready = s_req.rready;
        s_resp.rvalid = m_resp[rsel_q].rvalid;
        s_resp.rdata  = m_resp[rsel_q].rdata;
        s_resp.rresp  = m_resp[rsel_q].rresp;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst    <= W_ADDR;
      rstate    <= R_ADDR;
      wsel_q <= '0;
      rsel_q <= '0;
      werr_q <= 1'b0;
      rerr_q <= 1'b0;
    end else begin
      case (wst)
        W_ADDR: if (s_req.awvalid && s_req.wvalid && s_resp.awready && s_resp.wready) begin
          wst    <= W_RESP;
          wsel_q <= PE_W'(aw_pe);
          werr_q <= !aw_ok;
        end
        W_RESP: if (s_resp.bvalid && s_req.bready) wst <= W_ADDR;
      endcase
      case (rstate)
        R_ADDR: if (s_req.arvalid && s_resp.arready) begin
          rstate    <= R_RESP;
          rsel_q <= PE_W'(ar_pe);
          rerr_q <= !ar_ok;
        end
        R_RESP: if (s_resp.rvalid && s_req.rready) rstate <= R_ADDR;
      endcase
    end
  end

  // A slave behind this interconnect must take AW and W together.
  a_aw_w_together: assert property (@(posedge clk) disable iff (!rst_n)
                                    s_resp.awready == s_resp.wready);
endmodule
