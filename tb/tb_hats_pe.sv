// tb_hats_pe: one PE (PE 1 of 2) on a 20x20 frame with K = 10, so it owns
// cells 1 and 3. 4 events per ecell memory, 2 classes, delta_t = 1.5 ms,
// tau = 3 ms. Weights are loaded over AXI-Lite, 600 events of its cells are
// streamed back to back with a temporal reset half way, and every partial
// sum and count is compared with the reference model. The time between two
// accepted events must be F + 3 + 23*2 cycles, F being the number of events
// stored in the ecell of the first one.
module tb_hats_pe;
  import hats_pkg::*;
  import hats_ref_pkg::*;
  localparam int unsigned NUM_PE = 2, M = 20, N = 20, K = 10, DEPTH = 4, NC = 2, BINS = 49;
  localparam longint unsigned DT = 1500, TAU = 3000;
  logic clk = 0, rst_n = 0;
  logic s_tvalid, s_tready;
  aer_t s_tdata;
  logic [TS_W-1:0] s_tuser;
  axil_req_t  axil_req;
  axil_resp_t axil_resp;
  int unsigned checks = 0, failures = 0, n_lat = 0;
  longint unsigned cycle = 0;
  hats_ref ref_m;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  hats_pe #(.PE_ID(1), .NUM_PE(NUM_PE), .FRAME_M(M), .FRAME_N(N), .CELL_K(K), .RHO(3),
            .DELTA_T_US(DT), .TAU_US(TAU), .MEM_DEPTH(DEPTH), .NUM_CLASSES(NC),
            .MAC_ITERS(2), .TOTAL_W(24)) dut (.*);

  `include "axil_bfm.svh"

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    logic [31:0] d; logic [1:0] r;
    for (int lc = 0; lc < 2; lc++) begin
      automatic int c = lc * 2 + 1;
      axil_read(32'h2000 + 4 * lc, d, r);
      check(d == ref_m.count[c], $sformatf("count ecell %0d: %0d exp %0d", c, d, ref_m.count[c]));
      for (int q = 0; q < NC; q++) begin
        axil_read(32'h1000 + 4 * (lc * NC + q), d, r);
        check(longint'($signed(d)) == ref_m.psum[c][q],
              $sformatf("psum ecell %0d class %0d: %0d exp %0d", c, q, $signed(d), ref_m.psum[c][q]));
      end
    end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    longint unsigned t = 100, t_prev_acc = 0;
    int unsigned prev_fill = 0;
    ref_m = new(M, N, K, 3, DEPTH, NC, 24, DT, TAU);
    axil_idle();
    s_tvalid = 0; s_tdata = '0; s_tuser = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 1; c < 4; c += 2)
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < NC; q++)
          for (int b = 0; b < BINS; b++) begin
            automatic longint wv = longint'($urandom_range(0, 8192)) - 4096;
            ref_m.weight[c][p][q][b] = wv;
            axil_write(32'h8000 + 4 * ((((c / 2) * 2 + p) * NC + q) * BINS + b), 32'(wv), r);
          end
    for (int n = 0; n < 600; n++) begin
      automatic int unsigned ecell = ($urandom_range(0, 1) == 0) ? 1 : 3;
      automatic int unsigned x = (ecell / 2) * 10 + $urandom_range(0, 9);
      automatic int unsigned y = 10 + $urandom_range(0, 9);
      automatic int unsigned pol = $urandom_range(0, 1);
      automatic int unsigned fill_now;
      if (n == 300) begin
        @(negedge clk); s_tvalid = 0;
        axil_write(32'h0, 32'h1, r);
        ref_m.treset();
        t_prev_acc = 0;
      end
      fill_now = ref_m.mem[ecell].size();
      t += $urandom_range(0, 400);
      @(negedge clk);
      s_tvalid = 1; s_tdata = aer_encode(pol[0], x, y); s_tuser = TS_W'(t);
      do @(posedge clk); while (!s_tready);
      if (t_prev_acc != 0) begin
        check(cycle - t_prev_acc == 64'(prev_fill + 3 + 23 * NC),
              $sformatf("event %0d period %0d, expected %0d", n, cycle - t_prev_acc, prev_fill + 3 + 23 * NC));
        n_lat++;
      end
      t_prev_acc = cycle;
      prev_fill  = fill_now;
      ref_m.event_in(x, y, pol, t);
      if (n == 299 || n == 599) begin
        @(negedge clk); s_tvalid = 0;
        do axil_read(32'h4, d, r); while (d[0]);
        compare();
      end
    end
    @(negedge clk); s_tvalid = 0;
    axil_read(32'h8, d, r);
    check(d == 600, $sformatf("EVENTS %0d", d));
    axil_read(32'hC, d, r);
    check(d == ref_m.overflows && d > 0, $sformatf("OVERFLOW %0d exp %0d", d, ref_m.overflows));
    check(ref_m.expired > 0 && ref_m.decayed > 0 && n_lat > 100, $sformatf("coverage %0d %0d %0d", ref_m.expired, ref_m.decayed, n_lat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
