// svm_weight_mem: the learned linear-SVM weights of the cells owned by one
// processing element, one weight per (cell, polarity, class, window bin).
//
// The weights are held in LANES single-port RAM banks so that one read
// returns the LANES weights that one MAC iteration multiplies in parallel.
// Bin z of a (cell, polarity, class) group lives in bank z mod LANES at word
// group*ITERS + z / LANES, with group = (cell*2 + pol)*CLASSES + class.
// The processor loads the weights one at a time through the flat index
//   w = group*BINS + z,  BINS = (2*RHO+1)^2,
// which the write port splits into bank and word. Bank lanes past the last
// bin of the final iteration are never written and must be ignored by the
// reader.
//
// Timing: rd_data holds the word addressed in the previous cycle with rd_en
// high (single-cycle BRAM access, as in the paper). Writes take one cycle.
//
// The paper gives that the SVM weights are distributed over BRAMs with
// single-cycle access and that the MAC runs in 2 iterations; the bank layout
// and the flat load index are this design's choice.
module svm_weight_mem
  import hats_pkg::*;
#(
  parameter int unsigned CELLS       = 15,
  parameter int unsigned NUM_CLASSES = NUM_CLASSES_DEF,
  parameter int unsigned RHO         = RHO_DEF,
  parameter int unsigned MAC_ITERS   = MAC_ITERS_DEF,
  parameter int unsigned TOTAL_W     = TOTAL_W_DEF,
  localparam int unsigned BINS       = (2*RHO+1) * (2*RHO+1),
  localparam int unsigned LANES      = (BINS + MAC_ITERS - 1) / MAC_ITERS,
  localparam int unsigned WORDS      = CELLS * 2 * NUM_CLASSES * MAC_ITERS,
  localparam int unsigned NW         = CELLS * 2 * NUM_CLASSES * BINS
) (
  input  logic                         clk,
  // load port (flat weight index)
  input  logic                         wr_en,
  input  logic [$clog2(NW)-1:0]        wr_index,
  input  logic signed [TOTAL_W-1:0]    wr_data,
  // read port (one MAC iteration)
  input  logic                         rd_en,
  input  logic [$clog2(WORDS)-1:0]     rd_word,
  output logic signed [TOTAL_W-1:0]    rd_data [LANES]
);
  localparam int unsigned AW = $clog2(WORDS);

  int unsigned grp, z, word, lane;

  always_comb begin
    grp  = 32'(wr_index) / BINS;
    z    = 32'(wr_index) % BINS;
    word = grp * MAC_ITERS + z / LANES;
    lane = z % LANES;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_bank
    logic signed [TOTAL_W-1:0] bank [WORDS];
    always_ff @(posedge clk) begin
      if (wr_en && lane == l) bank[AW'(word)] <= wr_data;
      if (rd_en) rd_data[l] <= bank[rd_word];
    end
  end
endmodule
