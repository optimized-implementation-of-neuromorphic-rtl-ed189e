// tb_spatial_filter: 5000 random (current event, stored event) pairs in
// 10x10 cells with rho = 3 and delta_t = 1000 us, against an independent
// computation of the window test, the bin index and the modular age.
module tb_spatial_filter;
  import hats_pkg::*;
  localparam int unsigned RHO = 3;
  localparam longint unsigned DT = 1000;
  logic clk = 0, rst_n = 0;
  logic [LC_W-1:0] ev_lx, ev_ly;
  logic ev_pol, in_valid, hit, expired;
  logic [TSM_W-1:0] ev_t, dt;
  mem_entry_t in_entry;
  logic [5:0] bin;
  int unsigned checks = 0, failures = 0, n_hit = 0, n_exp = 0;

  always #5 clk = ~clk;

  spatial_filter #(.RHO(RHO), .DELTA_T_US(DT)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    ev_lx = 0; ev_ly = 0; ev_pol = 0; ev_t = 0; in_valid = 0; in_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int ex, ey, sx, sy, dx, dy, age;
      bit ok_win, ok_age, v;
      ex = $urandom_range(0, 9); ey = $urandom_range(0, 9);
      sx = $urandom_range(0, 9); sy = $urandom_range(0, 9);
      age = $urandom_range(0, 1500);
      v = ($urandom_range(0, 9) != 0);
      @(negedge clk);
      ev_lx = LC_W'(ex); ev_ly = LC_W'(ey); ev_pol = 1'($urandom); ev_t = TSM_W'($urandom);
      in_valid = v;
      in_entry.lx = LC_W'(sx); in_entry.ly = LC_W'(sy);
      in_entry.pol = ($urandom_range(0, 3) == 0) ? !ev_pol : ev_pol;
      in_entry.t = ev_t - TSM_W'(age);
      dx = sx - ex; dy = sy - ey;
      ok_win = v && (in_entry.pol == ev_pol) && dx >= -3 && dx <= 3 && dy >= -3 && dy <= 3;
      ok_age = (age <= 1000);
      @(negedge clk);
      check(hit == (ok_win && ok_age), $sformatf("hit %0d dx %0d dy %0d age %0d", hit, dx, dy, age));
      check(expired == (ok_win && !ok_age), "expired");
      if (ok_win && ok_age) begin
        n_hit++;
        check(32'(bin) == (dy + 3) * 7 + (dx + 3), $sformatf("bin %0d dx %0d dy %0d", bin, dx, dy));
        check(32'(dt) == age, "age");
      end
      if (ok_win && !ok_age) n_exp++;
    end
    check(n_hit > 100 && n_exp > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
