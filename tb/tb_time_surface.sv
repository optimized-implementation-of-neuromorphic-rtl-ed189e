// tb_time_surface: rho = 3, tau = 5000 us. Random bin updates with ages up to
// 6000 us (so the clamp to zero is reached); the 49 bins are compared after
// every update with k(dt) = 4096 - floor(dt*4096/5000) computed here in real
// arithmetic (the reciprocal form in the design must agree within one LSB per
// update, and exactly at dt = 0), and cleared every 50 updates. A second
// instance at the paper's tau = 10^6 ms must count 4096 per update.
module tb_time_surface;
  import hats_pkg::*;
  localparam int unsigned RHO = 3, BINS = 49;
  logic clk = 0, rst_n = 0, clear, upd_valid;
  logic [5:0] upd_bin;
  logic [TSM_W-1:0] upd_dt;
  logic signed [23:0] ts  [BINS];
  logic signed [23:0] ts2 [BINS];
  longint exp_lo [BINS], exp_hi [BINS];
  longint cnt [BINS];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  time_surface #(.RHO(RHO), .TOTAL_W(24), .TAU_US(5000)) dut (.*);
  time_surface #(.RHO(RHO), .TOTAL_W(24)) dut_paper (.clk, .rst_n, .clear, .upd_valid,
                                                     .upd_bin, .upd_dt, .ts(ts2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    clear = 0; upd_valid = 0; upd_bin = 0; upd_dt = 0;
    foreach (exp_lo[b]) begin exp_lo[b] = 0; exp_hi[b] = 0; cnt[b] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      automatic int b = $urandom_range(0, BINS - 1);
      automatic int unsigned age = ($urandom_range(0, 9) == 0) ? 0 : $urandom_range(0, 6000);
      longint k_exact;
      @(negedge clk);
      if (n % 50 == 0) begin
        clear = 1;
        foreach (exp_lo[i]) begin exp_lo[i] = 0; exp_hi[i] = 0; cnt[i] = 0; end
        @(negedge clk);
        clear = 0;
      end
      upd_valid = 1; upd_bin = 6'(b); upd_dt = TSM_W'(age);
      k_exact = (age >= 5000) ? 0 : 4096 - longint'($floor(real'(age) * 4096.0 / 5000.0));
      exp_hi[b] += k_exact + ((age > 0 && age < 5000) ? 1 : 0);
      exp_lo[b] += k_exact;
      cnt[b]    += 1;
      @(negedge clk);
      upd_valid = 0;
      foreach (ts[i]) begin
        check(longint'(ts[i]) >= exp_lo[i] && longint'(ts[i]) <= exp_hi[i],
              $sformatf("bin %0d = %0d, expected %0d..%0d", i, ts[i], exp_lo[i], exp_hi[i]));
        check(longint'(ts2[i]) == 4096 * cnt[i], "tau = 10^6 ms bin is not a count");
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
