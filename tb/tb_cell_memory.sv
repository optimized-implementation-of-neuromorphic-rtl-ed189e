// tb_cell_memory: 3 cells of 4 entries. Random appends, reads of every valid
// slot of every cell after each append (compared as multisets with a model
// that drops the oldest entry of a full cell), overflow pulses, and the clear.
module tb_cell_memory;
  import hats_pkg::*;
  localparam int unsigned CELLS = 3, DEPTH = 4;
  logic clk = 0, rst_n = 0, clear;
  logic [1:0] fill_cell, rd_cell, wr_cell;
  logic [2:0] fill;
  logic rd_en, wr_en, overflow;
  logic [1:0] rd_slot;
  mem_entry_t rd_data, wr_data;
  int unsigned checks = 0, failures = 0, n_ovf = 0;
  mem_entry_t model [CELLS][$];

  always #5 clk = ~clk;

  cell_memory #(.CELLS(CELLS), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic verify_cell(input int c);
    mem_entry_t got [$];
    mem_entry_t exp [$];
    fill_cell = 2'(c);
    #1;
    check(32'(fill) == model[c].size(), $sformatf("cell %0d fill %0d exp %0d", c, fill, model[c].size()));
    for (int s = 0; s < model[c].size(); s++) begin
      @(negedge clk); rd_en = 1; rd_cell = 2'(c); rd_slot = 2'(s);
      @(negedge clk); rd_en = 0;
      got.push_back(rd_data);
    end
    exp = model[c];
    got.sort() with (item);
    exp.sort() with (item);
    check(got == exp, $sformatf("cell %0d contents", c));
  endtask

  initial begin
    clear = 0; rd_en = 0; wr_en = 0; fill_cell = 0; rd_cell = 0; wr_cell = 0; rd_slot = 0;
    wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      automatic int c = $urandom_range(0, CELLS - 1);
      @(negedge clk);
      wr_en = 1; wr_cell = 2'(c); wr_data = mem_entry_t'($urandom);
      #1;
      check(overflow == (model[c].size() == DEPTH), "overflow flag");
      if (overflow) n_ovf++;
      if (model[c].size() == DEPTH) void'(model[c].pop_front());
      model[c].push_back(wr_data);
      @(negedge clk); wr_en = 0;
      verify_cell(c);
      if (n == 40) begin
        @(negedge clk); clear = 1;
        @(negedge clk); clear = 0;
        for (int k = 0; k < CELLS; k++) model[k].delete();
        for (int k = 0; k < CELLS; k++) verify_cell(k);
      end
    end
    check(n_ovf > 0, "no overflow happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
