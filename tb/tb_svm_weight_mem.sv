// tb_svm_weight_mem: 3 cells, 2 classes, rho = 3, 2 iterations. Loads every
// weight in random order through the flat index, then reads every word and
// checks each used lane against the weight of bin it*25 + lane of its group.
module tb_svm_weight_mem;
  import hats_pkg::*;
  localparam int unsigned CELLS = 3, NC = 2, BINS = 49, LANES = 25, IT = 2;
  localparam int unsigned NW = CELLS * 2 * NC * BINS, WORDS = CELLS * 2 * NC * IT;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [$clog2(NW)-1:0] wr_index;
  logic signed [23:0] wr_data;
  logic [$clog2(WORDS)-1:0] rd_word;
  logic signed [23:0] rd_data [LANES];
  logic signed [23:0] w [NW];
  int unsigned checks = 0, failures = 0;
  int order [NW];

  always #5 clk = ~clk;

  svm_weight_mem #(.CELLS(CELLS), .NUM_CLASSES(NC), .RHO(3), .MAC_ITERS(IT), .TOTAL_W(24)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_index = 0; wr_data = 0; rd_word = 0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    foreach (w[i]) w[i] = 24'($urandom);
    foreach (order[i]) begin
      @(negedge clk);
      wr_en = 1; wr_index = $clog2(NW)'(order[i]); wr_data = w[order[i]];
    end
    @(negedge clk); wr_en = 0;
    for (int wd = 0; wd < WORDS; wd++) begin
      @(negedge clk); rd_en = 1; rd_word = $clog2(WORDS)'(wd);
      @(negedge clk); rd_en = 0;
      for (int l = 0; l < LANES; l++) begin
        automatic int z = (wd % IT) * LANES + l;
        if (z < BINS)
          check(rd_data[l] == w[(wd / IT) * BINS + z],
                $sformatf("word %0d lane %0d = %0d exp %0d", wd, l, rd_data[l], w[(wd / IT) * BINS + z]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
