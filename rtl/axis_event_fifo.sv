// axis_event_fifo: AXI-Stream data FIFO that buffers AER events in front of
// one processing element.
//
// A circular buffer of DEPTH words with separate read and write pointers and
// an occupancy counter. s_tready is high while the FIFO is not full; m_tvalid
// is high while it is not empty, and m_tdata/m_tuser show the oldest word
// (first-word-fall-through). A word written while the FIFO is empty appears
// at the output one cycle later. Reads and writes can happen in the same
// cycle, so a full FIFO that is being drained keeps accepting one word per
// cycle. The stream carries the 24-bit AER word in TDATA and the microsecond
// timestamp in TUSER.
//
// The paper names an AXI-Stream data FIFO carrying 24-bit AER data between the
// DMA and the PEs; its depth (16 here, the smallest of the vendor FIFO) and
// its first-word-fall-through behaviour are this design's choice.
module axis_event_fifo
  import hats_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned DW    = AER_W,
  parameter int unsigned UW    = TS_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_tvalid,
  output logic          s_tready,
  input  logic [DW-1:0] s_tdata,
  input  logic [UW-1:0] s_tuser,
  output logic          m_tvalid,
  input  logic          m_tready,
  output logic [DW-1:0] m_tdata,
  output logic [UW-1:0] m_tuser,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW+UW-1:0] buf_q [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic push, pop;

  assign s_tready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign m_tvalid = (count != '0);
  assign push     = s_tvalid && s_tready;
  assign pop      = m_tvalid && m_tready;
  assign {m_tuser, m_tdata} = buf_q[rptr];
  assign level    = count;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) buf_q[wptr] <= {s_tuser, s_tdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // AXI-Stream rule: once valid, the word stays until it is taken.
  a_m_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             m_tvalid && !m_tready |=> m_tvalid);
endmodule
