// spatial_filter: decides whether one stored event takes part in the time
// surface of the current event, and if so in which bin.
//
// A stored event e_j counts for the current event e_i when it has the same
// polarity, lies inside the (2*RHO+1) x (2*RHO+1) window around e_i
// (|x_j - x_i| <= RHO and |y_j - y_i| <= RHO, both in local cell coordinates)
// and is not older than DELTA_T_US. Its bin is z = (dy+RHO)*(2*RHO+1) + (dx+RHO)
// with dx = x_j - x_i, dy = y_j - y_i, and its age is dt = t_i - t_j, taken
// modulo 2^TSM_W (exact while ages stay below 131 ms). An entry that passes
// the polarity and window tests but is too old raises `expired` instead.
//
// Timing: one register stage; the result for the entry given with in_valid
// appears on the next cycle.
//
// The selection rule (same polarity, window of radius rho, events of the last
// delta_t of the same cell memory) is the paper's equation (1); the bin order
// and the modular age are this design's choice.
module spatial_filter
  import hats_pkg::*;
#(
  parameter int unsigned     RHO        = RHO_DEF,
  parameter longint unsigned DELTA_T_US = DELTA_T_US_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  // current event
  input  logic [LC_W-1:0]     ev_lx,
  input  logic [LC_W-1:0]     ev_ly,
  input  logic                ev_pol,
  input  logic [TSM_W-1:0]    ev_t,
  // stored event
  input  logic                in_valid,
  input  mem_entry_t          in_entry,
  // result
  output logic                hit,
  output logic                expired,
  output logic [$clog2((2*RHO+1)*(2*RHO+1))-1:0] bin,
  output logic [TSM_W-1:0]    dt
);
  localparam int unsigned WIN  = 2*RHO + 1;
  localparam int unsigned BINS = WIN * WIN;
  localparam int unsigned BW   = $clog2(BINS);

  logic signed [LC_W+1:0] dx, dy;
  logic [TSM_W-1:0]       age;
  logic                   near, young;

  always_comb begin
    dx    = $signed({2'b00, in_entry.lx}) - $signed({2'b00, ev_lx});
    dy    = $signed({2'b00, in_entry.ly}) - $signed({2'b00, ev_ly});
    age   = ev_t - in_entry.t;
    near  = in_valid && (in_entry.pol == ev_pol) &&
            (dx <= $signed((LC_W+2)'(RHO))) && (dx >= -$signed((LC_W+2)'(RHO))) &&
            (dy <= $signed((LC_W+2)'(RHO))) && (dy >= -$signed((LC_W+2)'(RHO)));
    young = (64'(age) <= DELTA_T_US);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit     <= 1'b0;
      expired <= 1'b0;
      bin     <= '0;
      dt      <= '0;
    end else begin
      hit     <= near && young;
      expired <= near && !young;
      bin     <= BW'((32'(dy) + RHO) * WIN + (32'(dx) + RHO));
      dt      <= age;
    end
  end
endmodule
