// tb_cwts_mac: rho = 3, 2 iterations, <24,12>. A behavioural weight RAM
// (one-cycle read) holds 8 random weight groups. For 300 random time
// surfaces (bins up to +-64.0, weights up to +-2.0, some large values to
// force wrap-around) the local sum is compared with
//   wrap24( sum_z wrap24( (ts[z]*w[z]) >>> 12 ) )
// and `done` must come exactly 22 cycles (2 x 11) after `start`.
module tb_cwts_mac;
  import hats_pkg::*;
  localparam int unsigned BINS = 49, LANES = 25, IT = 2, WORDS = 16;
  logic clk = 0, rst_n = 0, start, w_rd_en, busy, done;
  logic [7:0] base_word, w_rd_word;
  logic signed [23:0] ts [BINS];
  logic signed [23:0] w_rd_data [LANES];
  logic signed [23:0] local_sum;
  logic signed [23:0] wram [WORDS][LANES];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  cwts_mac #(.RHO(3), .MAC_ITERS(IT), .TOTAL_W(24), .WORD_W(8)) dut (.*);

  always_ff @(posedge clk) if (w_rd_en) w_rd_data <= wram[w_rd_word[3:0]];

  function automatic longint wrap24(longint v);
    longint u = v & 64'hFFFFFF;
    return (u >= 64'h800000) ? u - 64'h1000000 : u;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    start = 0; base_word = 0;
    foreach (ts[i]) ts[i] = 0;
    foreach (wram[i, l]) wram[i][l] = 24'(int'($urandom_range(0, 16384)) - 8192);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int g = $urandom_range(0, WORDS / IT - 1);
      automatic int lat = 0;
      automatic longint exp_sum = 0;
      automatic bit big = (n % 10 == 9);
      foreach (ts[i]) ts[i] = big ? 24'($urandom) : 24'(int'($urandom_range(0, 524288)) - 262144);
      for (int z = 0; z < BINS; z++)
        exp_sum = wrap24(exp_sum + wrap24((longint'(ts[z]) * longint'(wram[g*IT + z / LANES][z % LANES])) >>> 12));
      @(negedge clk);
      check(!busy, "busy before start");
      start = 1; base_word = 8'(g * IT);
      @(negedge clk);
      start = 0; base_word = 8'($urandom);   // must be held inside the MAC
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == 22, $sformatf("latency %0d, expected 22", lat));
      check(longint'(local_sum) == exp_sum, $sformatf("sum %0d exp %0d", local_sum, exp_sum));
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
