// tb_hats_top_full: end-to-end test of hats_top with every parameter at its
// default (120x100 frame, K = 10, rho = 3, 8 PEs, 256 events per cell,
// delta_t = 100 ms, tau = 10^6 ms, <24,12>). All 11760 weights are loaded over
// AXI-Lite, then two 100 ms windows are streamed: 3000 clustered events, and
// 18000 (the largest N-CARS sample). Each window is checked cell by cell
// against the reference model and closed with a temporal reset. At this tau
// the kernel never decays below one LSB, and cell-memory overflow depends on
// how the random clusters fall, so only back-pressure, reset and
// out-of-frame events are required to occur.
module tb_hats_top_full;
  import hats_pkg::*;
  localparam int unsigned     P_NUM_PE  = NUM_PE_DEF;
  localparam int unsigned     P_M       = FRAME_M_DEF;
  localparam int unsigned     P_N       = FRAME_N_DEF;
  localparam int unsigned     P_K       = CELL_K_DEF;
  localparam int unsigned     P_RHO     = RHO_DEF;
  localparam int unsigned     P_DEPTH   = MEM_DEPTH_DEF;
  localparam int unsigned     P_CLASSES = NUM_CLASSES_DEF;
  localparam int unsigned     P_TOTAL_W = TOTAL_W_DEF;
  localparam longint unsigned P_DELTA_T = DELTA_T_US_DEF;
  localparam longint unsigned P_TAU     = TAU_US_DEF;
  localparam int unsigned     N_WINDOWS = 2;
  localparam int unsigned     GAP_PCT   = 0;
  localparam longint unsigned T_SPAN_US = 100_000;
  localparam bit              CHECK_ALL_MECH = 0;

  // window 0: a mid-size sample; window 1: the largest N-CARS sample size
  function automatic int unsigned n_events(input int win);
    return (win == 0) ? 3000 : 18000;
  endfunction

  `include "hats_top_test.svh"

  hats_top u_dut (
    .clk, .rst_n, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tuser,
    .s_axil_req(axil_req), .s_axil_resp(axil_resp), .dropped_events
  );

  initial begin
    #500_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
