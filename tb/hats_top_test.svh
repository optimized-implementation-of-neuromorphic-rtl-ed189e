// Shared body of the end-to-end testbenches of hats_top. The including
// module declares the localparams P_* used to build the DUT, the DUT itself
// (instance u_dut), the function n_events(window) and N_WINDOWS / GAP_PCT / T_SPAN_US /
// CHECK_ALL_MECH (require overflow, expiry and decay to have occurred).
//
// The testbench plays the processor and its DMA: it loads random SVM weights
// over AXI-Lite, streams clustered random events with rising timestamps,
// waits until every PE has processed its share, reads back every partial sum
// and Count and compares them with the bit-exact reference model, then issues
// the temporal reset and repeats for the next window. It also normalises the
// partial sums as the processor would (sum over cells of S/Count per class)
// and reports the decision.

import hats_pkg::*;
import hats_ref_pkg::*;

localparam int unsigned BINS    = (2*P_RHO+1) * (2*P_RHO+1);
localparam int unsigned CELLS_Y = P_N / P_K;
localparam int unsigned CELLS   = (P_M / P_K) * CELLS_Y;

logic            clk = 1'b0;
logic            rst_n = 1'b0;
logic            s_axis_tvalid;
logic            s_axis_tready;
aer_t            s_axis_tdata;
logic [TS_W-1:0] s_axis_tuser;
axil_req_t       axil_req;
axil_resp_t      axil_resp;
logic [31:0]     dropped_events;

always #5 clk = ~clk;

`include "axil_bfm.svh"

int unsigned checks = 0, failures = 0;
int unsigned sent_in = 0, sent_out = 0;
int unsigned n_stall = 0, n_reset = 0, n_decerr = 0, n_overflow_hw = 0;
longint unsigned cycle = 0;
hats_ref ref_m;

always @(posedge clk) begin
  cycle <= cycle + 1;
  if (s_axis_tvalid && !s_axis_tready) n_stall++;
end

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL: %s", what);
  end
endtask

function automatic logic [31:0] pe_addr(input int unsigned pe, input int unsigned off);
  return (32'(pe) << PE_ADDR_W) | 32'(off);
endfunction

task automatic load_weights();
  logic [1:0] r;
  for (int c = 0; c < CELLS; c++)
    for (int p = 0; p < 2; p++)
      for (int q = 0; q < P_CLASSES; q++)
        for (int b = 0; b < BINS; b++) begin
          int unsigned lc = c / P_NUM_PE;
          int unsigned w  = ((lc*2 + p)*P_CLASSES + q)*BINS + b;
          // uniform in [-1, 1]
          longint wv = longint'($urandom_range(0, 2 << (P_TOTAL_W - INT_W))) -
                       (longint'(1) << (P_TOTAL_W - INT_W));
          ref_m.weight[c][p][q][b] = ref_m.wrap(wv);
          axil_write(pe_addr(c % P_NUM_PE, 32'h8000 + 4*w), 32'(wv), r);
        end
endtask

task automatic send_window(input int win, input longint unsigned t0);
  longint unsigned t = t0;
  int unsigned cx, cy;
  for (int i = 0; i < int'(n_events(win)); i++) begin
    int unsigned x, y, pol;
    if (i % 50 == 0) begin   // move the cluster centre
      cx = $urandom_range(0, P_M - 1);
      cy = $urandom_range(0, P_N - 1);
    end
    x   = (cx + $urandom_range(0, 4)) % P_M;
    y   = (cy + $urandom_range(0, 4)) % P_N;
    pol = $urandom_range(0, 1);
    if ($urandom_range(0, 99) < 2) x = P_M + $urandom_range(0, 127 - P_M); // outside the frame
    t  += $urandom_range(0, 2 * T_SPAN_US / n_events(win));
    while ($urandom_range(0, 99) < GAP_PCT) @(negedge clk);
    @(negedge clk);
    s_axis_tvalid = 1'b1;
    s_axis_tdata  = aer_encode(pol[0], x, y);
    s_axis_tuser  = TS_W'(t);
    do @(posedge clk); while (!s_axis_tready);
    if (ref_m.cell_of(x, y) >= 0) begin
      ref_m.event_in(x, y, pol, t);
      sent_in++;
    end else sent_out++;
    @(negedge clk);
    s_axis_tvalid = 1'b0;
  end
endtask

task automatic wait_idle();
  logic [31:0] d; logic [1:0] r;
  int unsigned total;
  longint unsigned t_start = cycle;
  do begin
    total = 0;
    for (int p = 0; p < P_NUM_PE; p++) begin
      axil_read(pe_addr(p, 32'h8), d, r);
      total += d;
    end
  end while (total != sent_in && cycle - t_start < 64'd50_000_000);
  check(total == sent_in, $sformatf("events processed %0d, sent %0d", total, sent_in));
endtask

task automatic compare_all(input int win);
  logic [31:0] d; logic [1:0] r;
  real score [];
  score = new[P_CLASSES];
  foreach (score[q]) score[q] = 0.0;
  for (int c = 0; c < CELLS; c++) begin
    int unsigned pe = c % P_NUM_PE, lc = c / P_NUM_PE;
    axil_read(pe_addr(pe, 32'h2000 + 4*lc), d, r);
    check(d == ref_m.count[c], $sformatf("win %0d cell %0d count %0d exp %0d", win, c, d, ref_m.count[c]));
    for (int q = 0; q < P_CLASSES; q++) begin
      axil_read(pe_addr(pe, 32'h1000 + 4*(lc*P_CLASSES + q)), d, r);
      check(longint'($signed(d)) == ref_m.psum[c][q],
            $sformatf("win %0d cell %0d class %0d psum %0d exp %0d", win, c, q,
                      $signed(d), ref_m.psum[c][q]));
      if (ref_m.count[c] != 0)
        score[q] += real'($signed(d)) / (real'(1 << (P_TOTAL_W - INT_W)) * real'(ref_m.count[c]));
    end
  end
  foreach (score[q]) $display("window %0d class %0d normalised score %f", win, q, score[q]);
endtask

task automatic temporal_reset();
  logic [1:0] r;
  for (int p = 0; p < P_NUM_PE; p++) axil_write(pe_addr(p, 32'h0), 32'h1, r);
  ref_m.treset();
  n_reset++;
endtask

initial begin
  longint unsigned t_stream;
  logic [31:0] d; logic [1:0] r;
  ref_m = new(P_M, P_N, P_K, P_RHO, P_DEPTH, P_CLASSES, P_TOTAL_W, P_DELTA_T, P_TAU);
  axil_idle();
  s_axis_tvalid = 1'b0;
  s_axis_tdata  = '0;
  s_axis_tuser  = '0;
  repeat (4) @(posedge clk);
  rst_n = 1'b1;
  load_weights();
  // PARAMS register of PE 0
  axil_read(pe_addr(0, 32'h10), d, r);
  check(d[15:0] == 16'((CELLS + P_NUM_PE - 1) / P_NUM_PE) && d[31:16] == 16'(P_CLASSES),
        $sformatf("PARAMS %h", d));
  // an address past the last PE is answered with DECERR
  if (P_NUM_PE < 16) begin
    axil_read(pe_addr(P_NUM_PE, 32'h8), d, r);
    check(r == 2'b11, "decode error on read");
    if (r == 2'b11) n_decerr++;
  end
  for (int win = 0; win < N_WINDOWS; win++) begin
    t_stream = cycle;
    send_window(win, 64'(win) * (T_SPAN_US + 1000) + 5);
    wait_idle();
    $display("window %0d: %0d events in %0d cycles (%f events per cycle)", win, n_events(win),
             cycle - t_stream, real'(n_events(win)) / real'(cycle - t_stream));
    compare_all(win);
    n_overflow_hw = 0;
    for (int p = 0; p < P_NUM_PE; p++) begin
      axil_read(pe_addr(p, 32'hC), d, r);
      n_overflow_hw += d;
    end
    check(n_overflow_hw == ref_m.overflows, $sformatf("overflows %0d exp %0d", n_overflow_hw, ref_m.overflows));
    temporal_reset();
  end
  // after a reset every count reads zero
  axil_read(pe_addr(0, 32'h2000), d, r);
  check(d == 0, "count cleared by temporal reset");
  check(dropped_events == sent_out, $sformatf("dropped %0d exp %0d", dropped_events, sent_out));
  // every mechanism must have happened
  $display("mechanisms: stall=%0d overflow=%0d expired=%0d decayed=%0d reset=%0d dropped=%0d decerr=%0d",
           n_stall, ref_m.overflows, ref_m.expired, ref_m.decayed, n_reset, sent_out, n_decerr);
  check(n_stall > 0, "FIFO back-pressure never happened");
  check(n_reset > 0, "temporal reset never happened");
  check(sent_out > 0, "out-of-frame event never happened");
  if (CHECK_ALL_MECH) begin
    check(ref_m.overflows > 0, "cell memory overflow never happened");
    check(ref_m.expired > 0, "expired event never happened");
    check(ref_m.decayed > 0, "kernel decay never happened");
  end
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
