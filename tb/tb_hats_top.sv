// tb_hats_top: end-to-end test of hats_top at a reduced size (40x30 frame,
// 12 cells on 4 PEs, 2 classes, 8 events per cell memory, delta_t = 1 ms,
// tau = 4 ms) so that FIFO back-pressure, cell-memory overflow, expired
// events, kernel decay, temporal reset, out-of-frame events and the decode
// error all occur. Three windows of 400 events each.
module tb_hats_top;
  localparam int unsigned     P_NUM_PE  = 4;
  localparam int unsigned     P_M       = 40;
  localparam int unsigned     P_N       = 30;
  localparam int unsigned     P_K       = 10;
  localparam int unsigned     P_RHO     = 3;
  localparam int unsigned     P_DEPTH   = 8;
  localparam int unsigned     P_CLASSES = 2;
  localparam int unsigned     P_TOTAL_W = 24;
  localparam longint unsigned P_DELTA_T = 1000;
  localparam longint unsigned P_TAU     = 4000;
  localparam int unsigned     N_WINDOWS = 3;
  localparam int unsigned     GAP_PCT   = 10;
  localparam longint unsigned T_SPAN_US = 3000;
  localparam bit              CHECK_ALL_MECH = 1;

  function automatic int unsigned n_events(input int win);
    return 400;
  endfunction

  `include "hats_top_test.svh"

  hats_top #(.NUM_PE(P_NUM_PE), .FRAME_M(P_M), .FRAME_N(P_N), .CELL_K(P_K), .RHO(P_RHO),
             .DELTA_T_US(P_DELTA_T), .TAU_US(P_TAU), .MEM_DEPTH(P_DEPTH),
             .NUM_CLASSES(P_CLASSES), .MAC_ITERS(2), .TOTAL_W(P_TOTAL_W), .FIFO_DEPTH(4)) u_dut (
    .clk, .rst_n, .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tuser,
    .s_axil_req(axil_req), .s_axil_resp(axil_resp), .dropped_events
  );

  initial begin
    #50_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
