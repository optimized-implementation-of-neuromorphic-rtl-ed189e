// cwts_mac: multiplies the local time surface of an event with the SVM
// weights of its cell, polarity and class, and returns the local sum
//   sum_z  ts[z] * w[z]
// in signed <TOTAL_W, 12> fixed point.
//
// The BINS = (2*RHO+1)^2 products are spread over LANES = ceil(BINS/ITERS)
// parallel multipliers and done in ITERS iterations. An iteration runs
// through the following stages one after the other, one cycle each, and the
// next iteration starts when the previous one has finished:
//   1      weight RAM read issued, time-surface lanes latched
//   2      weights arrive, operands registered (lanes past BINS forced to 0)
//   3, 4   product, one extra register stage (as a pipelined DSP multiply)
//   5      product shifted right by FRAC (truncation) to TOTAL_W bits
//   6 ..   pairwise adder tree, clog2(LANES) levels
//   last   tree result added into the running sum
// With the paper's rho = 3 (49 bins) and 2 iterations, LANES = 25, the tree
// has 5 levels and an iteration takes 11 cycles. Sums wrap in TOTAL_W bits.
//
// Timing: `start` is sampled in the idle state and stage 1 of iteration 0
// runs in that same cycle; `done` is a one-cycle pulse with `local_sum` valid,
// ITERS*ITER_CYCLES cycles after `start` (22 cycles at the defaults). `ts`
// and `base_word` must stay stable while `busy`.
//
// Following the paper: 2 iterations of 11 cycles, <24,12> arithmetic. This
// design's choice: the division of the 11 cycles into stages, truncation and
// wrap-around (the default behaviour of <W,I> fixed-point types).
module cwts_mac
  import hats_pkg::*;
#(
  parameter int unsigned RHO       = RHO_DEF,
  parameter int unsigned MAC_ITERS = MAC_ITERS_DEF,
  parameter int unsigned TOTAL_W   = TOTAL_W_DEF,
  parameter int unsigned WORD_W    = 8,
  localparam int unsigned BINS        = (2*RHO+1) * (2*RHO+1),
  localparam int unsigned LANES       = (BINS + MAC_ITERS - 1) / MAC_ITERS,
  localparam int unsigned ITER_CYCLES = 6 + $clog2(LANES)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [WORD_W-1:0]         base_word,
  input  logic signed [TOTAL_W-1:0] ts [BINS],
  // weight RAM read port
  output logic                      w_rd_en,
  output logic [WORD_W-1:0]         w_rd_word,
  input  logic signed [TOTAL_W-1:0] w_rd_data [LANES],
  // result
  output logic                      busy,
  output logic                      done,
  output logic signed [TOTAL_W-1:0] local_sum
);
  localparam int unsigned FRAC = TOTAL_W - INT_W;
  localparam int unsigned IW   = (MAC_ITERS > 1) ? $clog2(MAC_ITERS) : 1;
  localparam int unsigned SW   = $clog2(ITER_CYCLES + 1);

  logic [IW-1:0]             it;
  logic [SW-1:0]             stg;
  logic [WORD_W-1:0]         base_q;
  logic signed [TOTAL_W-1:0]   a_q  [LANES];
  logic signed [TOTAL_W-1:0]   b_q  [LANES];
  logic signed [2*TOTAL_W-1:0] p1_q [LANES];
  logic signed [2*TOTAL_W-1:0] p2_q [LANES];
  logic signed [TOTAL_W-1:0]   v_q  [LANES];
  logic signed [TOTAL_W-1:0]   acc_q;

  logic        stage1;
  logic [IW-1:0] it_now;

  assign stage1    = (!busy && start) || (busy && stg == SW'(1));
  assign it_now    = busy ? it : '0;
  assign w_rd_en   = stage1;
  assign w_rd_word = (busy ? base_q : base_word) + WORD_W'(it_now);

  function automatic logic lane_used(input logic [IW-1:0] i, input int unsigned l);
    return (32'(i) * LANES + l) < BINS;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      it        <= '0;
      stg       <= '0;
      base_q    <= '0;
      acc_q     <= '0;
      local_sum <= '0;
      for (int l = 0; l < LANES; l++) begin
        a_q[l] <= '0; b_q[l] <= '0; p1_q[l] <= '0; p2_q[l] <= '0; v_q[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (stage1) begin
        for (int l = 0; l < LANES; l++)
          a_q[l] <= lane_used(it_now, l) ? ts[(32'(it_now) * LANES + l) % BINS] : '0;
      end
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          it     <= '0;
          stg    <= SW'(2);
          base_q <= base_word;
          acc_q  <= '0;
        end
      end else begin
        stg <= stg + 1'b1;
        if (stg == SW'(2)) begin
          for (int l = 0; l < LANES; l++)
            b_q[l] <= lane_used(it, l) ? w_rd_data[l] : '0;
        end
        if (stg == SW'(3)) for (int l = 0; l < LANES; l++) p1_q[l] <= a_q[l] * b_q[l];
        if (stg == SW'(4)) for (int l = 0; l < LANES; l++) p2_q[l] <= p1_q[l];
        if (stg == SW'(5)) for (int l = 0; l < LANES; l++) v_q[l] <= TOTAL_W'(p2_q[l] >>> FRAC);
        if (stg >= SW'(6) && stg < SW'(ITER_CYCLES)) begin
          for (int l = 0; l < LANES; l++)
            v_q[l] <= ((2*l   < LANES) ? v_q[(2*l)   % LANES] : '0) +
                      ((2*l+1 < LANES) ? v_q[(2*l+1) % LANES] : '0);
        end
        if (stg == SW'(ITER_CYCLES)) begin
          acc_q <= acc_q + v_q[0];
          if (it == IW'(MAC_ITERS - 1)) begin
            busy      <= 1'b0;
            done      <= 1'b1;
            local_sum <= acc_q + v_q[0];
          end else begin
            it  <= it + 1'b1;
            stg <= SW'(1);
          end
        end
      end
    end
  end
endmodule
