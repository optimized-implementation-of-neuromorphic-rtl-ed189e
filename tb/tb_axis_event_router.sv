// tb_axis_event_router: 4 PEs on a 45x32 frame with K = 10 (cells cover
// 40x30). Random events, random per-PE ready: checks that exactly the PE
// owning the cell (cell mod 4) sees valid, that ready follows that PE, that
// data and timestamp pass through, and that out-of-frame events are consumed
// and counted.
module tb_axis_event_router;
  import hats_pkg::*;
  localparam int unsigned NUM_PE = 4, M = 45, N = 32, K = 10;
  logic clk = 0, rst_n = 0;
  logic s_tvalid, s_tready;
  aer_t s_tdata, m_tdata;
  logic [TS_W-1:0] s_tuser, m_tuser;
  logic [NUM_PE-1:0] m_tvalid, m_tready;
  logic [31:0] dropped;
  int unsigned checks = 0, failures = 0, n_out = 0;
  int unsigned per_pe [NUM_PE];

  always #5 clk = ~clk;

  axis_event_router #(.NUM_PE(NUM_PE), .FRAME_M(M), .FRAME_N(N), .CELL_K(K)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    s_tvalid = 0; s_tdata = '0; s_tuser = '0; m_tready = '0;
    foreach (per_pe[i]) per_pe[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int unsigned x, y, c, pe;
      bit in_frame;
      x = $urandom_range(0, M + 3);
      y = $urandom_range(0, N + 3);
      in_frame = (x < 40) && (y < 30);
      c  = (x / K) * 3 + (y / K);
      pe = c % NUM_PE;
      @(negedge clk);
      s_tvalid = 1;
      s_tdata  = aer_encode(1'($urandom), x, y);
      s_tuser  = $urandom;
      m_tready = NUM_PE'($urandom);
      #1;
      if (in_frame) begin
        check(m_tvalid == NUM_PE'(1 << pe), $sformatf("x=%0d y=%0d valid %b exp PE %0d", x, y, m_tvalid, pe));
        check(s_tready == m_tready[pe], "ready not from the owning PE");
        check(m_tdata == s_tdata && m_tuser == s_tuser, "payload");
        if (s_tready) per_pe[pe]++;
      end else begin
        check(m_tvalid == '0 && s_tready, "out-of-frame event not consumed");
        n_out++;
      end
    end
    @(negedge clk); s_tvalid = 0;
    @(negedge clk);
    check(dropped == n_out, $sformatf("dropped %0d exp %0d", dropped, n_out));
    foreach (per_pe[i]) check(per_pe[i] > 0, "a PE got no event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
