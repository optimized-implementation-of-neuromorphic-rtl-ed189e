// tb_partial_sum_mem: 5 cells, 3 classes. Random accumulations (large values
// so the 24-bit wrap occurs) and count increments, every sum and count
// compared through the read port, and a clear in the middle.
module tb_partial_sum_mem;
  import hats_pkg::*;
  localparam int unsigned CELLS = 5, NC = 3;
  logic clk = 0, rst_n = 0, clear, acc_en, cnt_en;
  logic [2:0] acc_cell, cnt_cell, rd_cell;
  logic [1:0] acc_class, rd_class;
  logic signed [23:0] acc_value, rd_psum;
  logic [31:0] rd_count;
  longint ps [CELLS][NC];
  int unsigned cn [CELLS];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  partial_sum_mem #(.CELLS(CELLS), .NUM_CLASSES(NC), .TOTAL_W(24)) dut (.*);

  function automatic longint wrap24(longint v);
    longint u = v & 64'hFFFFFF;
    return (u >= 64'h800000) ? u - 64'h1000000 : u;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic verify();
    for (int c = 0; c < CELLS; c++)
      for (int k = 0; k < NC; k++) begin
        rd_cell = 3'(c); rd_class = 2'(k);
        #1;
        check(longint'(rd_psum) == ps[c][k], $sformatf("psum[%0d][%0d] %0d exp %0d", c, k, rd_psum, ps[c][k]));
        check(rd_count == cn[c], "count");
      end
  endtask

  initial begin
    clear = 0; acc_en = 0; cnt_en = 0; acc_cell = 0; cnt_cell = 0; acc_class = 0;
    acc_value = 0; rd_cell = 0; rd_class = 0;
    foreach (ps[c, k]) ps[c][k] = 0;
    foreach (cn[c]) cn[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n == 200) begin
        clear = 1;
        @(negedge clk);
        clear = 0;
        foreach (ps[c, k]) ps[c][k] = 0;
        foreach (cn[c]) cn[c] = 0;
      end
      acc_en = $urandom_range(0, 1); acc_cell = 3'($urandom_range(0, CELLS - 1));
      acc_class = 2'($urandom_range(0, NC - 1)); acc_value = 24'($urandom);
      cnt_en = $urandom_range(0, 1); cnt_cell = 3'($urandom_range(0, CELLS - 1));
      if (acc_en) ps[acc_cell][acc_class] = wrap24(ps[acc_cell][acc_class] + longint'(acc_value));
      if (cnt_en) cn[cnt_cell]++;
      @(negedge clk);
      acc_en = 0; cnt_en = 0;
      verify();
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
