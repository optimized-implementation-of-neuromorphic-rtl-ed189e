// partial_sum_mem: the partial sums S[cell][class] and the event counts
// Count[cell] of the cells owned by one processing element.
//
// An event adds its local sum (time surface times weights) to the partial
// sum of its cell and class; Count of its cell goes up by one per event.
// Partial sums wrap in signed TOTAL_W bits, counts in 32 bits. `clear` (the
// temporal reset) zeroes everything in one cycle. The processor reads one
// partial sum and one count through a combinational read port; dividing the
// sums by the counts is left to it.
//
// Following the paper: partial sums are stored per cell instead of the
// histogram, Count per cell (equation 3), both reset every delta_t. This
// design's choice: registers rather than RAM, so the reset is one cycle.
module partial_sum_mem
  import hats_pkg::*;
#(
  parameter int unsigned CELLS       = 15,
  parameter int unsigned NUM_CLASSES = NUM_CLASSES_DEF,
  parameter int unsigned TOTAL_W     = TOTAL_W_DEF,
  localparam int unsigned CW         = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned KW         = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      acc_en,
  input  logic [CW-1:0]             acc_cell,
  input  logic [KW-1:0]             acc_class,
  input  logic signed [TOTAL_W-1:0] acc_value,
  input  logic                      cnt_en,
  input  logic [CW-1:0]             cnt_cell,
  input  logic [CW-1:0]             rd_cell,
  input  logic [KW-1:0]             rd_class,
  output logic signed [TOTAL_W-1:0] rd_psum,
  output logic [31:0]               rd_count
);
  logic signed [TOTAL_W-1:0] psum_q  [CELLS][NUM_CLASSES];
  logic [31:0]               count_q [CELLS];

  assign rd_psum  = psum_q[rd_cell][rd_class];
  assign rd_count = count_q[rd_cell];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CELLS; c++) begin
        count_q[c] <= '0;
        for (int k = 0; k < NUM_CLASSES; k++) psum_q[c][k] <= '0;
      end
    end else if (clear) begin
      for (int c = 0; c < CELLS; c++) begin
        count_q[c] <= '0;
        for (int k = 0; k < NUM_CLASSES; k++) psum_q[c][k] <= '0;
      end
    end else begin
      if (acc_en) psum_q[acc_cell][acc_class] <= psum_q[acc_cell][acc_class] + acc_value;
      if (cnt_en) count_q[cnt_cell] <= count_q[cnt_cell] + 1'b1;
    end
  end
endmodule
