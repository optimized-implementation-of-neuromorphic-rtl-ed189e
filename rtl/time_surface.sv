// time_surface: the (2*RHO+1)^2 bins of the local time surface of the event
// being processed, built with a linearly decaying time kernel.
//
// Each selected stored event adds k(dt) to its bin, where
//   k(dt) = 1 - dt / tau   for dt < tau, and 0 otherwise,
// in the signed <TOTAL_W, 12> fixed-point format (FRAC = TOTAL_W - 12
// fractional bits). The division is replaced by a multiplication with the
// constant RECIP = floor(2^(FRAC+32) / tau):
//   k(dt) = 2^FRAC - ((dt * RECIP) >> 32).
// Bins add with wrap-around in TOTAL_W bits. `clear` zeroes all bins before a
// new event; one update per cycle is accepted and is visible on `ts` in the
// next cycle.
//
// With the paper's tau = 10^6 ms and ages below 100 ms the correction term is
// below one LSB of the 12 fractional bits, so each bin then simply counts
// its events; smaller tau values exercise the decay.
//
// Following the paper: the linear-decayed kernel replacing the exponential
// one, tau, and the <24,12> format. This design's choice: the reciprocal
// multiply, truncation of the correction, and the clamp at zero.
module time_surface
  import hats_pkg::*;
#(
  parameter int unsigned     RHO     = RHO_DEF,
  parameter int unsigned     TOTAL_W = TOTAL_W_DEF,
  parameter longint unsigned TAU_US  = TAU_US_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         upd_valid,
  input  logic [$clog2((2*RHO+1)*(2*RHO+1))-1:0] upd_bin,
  input  logic [TSM_W-1:0]             upd_dt,
  output logic signed [TOTAL_W-1:0]    ts [(2*RHO+1)*(2*RHO+1)]
);
  localparam int unsigned     BINS  = (2*RHO+1) * (2*RHO+1);
  localparam int unsigned     FRAC  = TOTAL_W - INT_W;
  localparam longint unsigned RECIP = tau_recip(TAU_US, FRAC);

  logic [63:0]               corr;
  logic signed [TOTAL_W-1:0] kval;

  always_comb begin
    corr = (64'(upd_dt) * RECIP) >> 32;
    if (64'(upd_dt) >= TAU_US) kval = '0;
    else                       kval = TOTAL_W'((64'd1 << FRAC) - corr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BINS; b++) ts[b] <= '0;
    end else if (clear) begin
      for (int b = 0; b < BINS; b++) ts[b] <= '0;
    end else if (upd_valid) begin
      ts[upd_bin] <= ts[upd_bin] + kval;
    end
  end
endmodule
