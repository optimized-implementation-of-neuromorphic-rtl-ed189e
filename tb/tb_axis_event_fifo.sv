// tb_axis_event_fifo: pushes 2000 random words through a 4-deep FIFO with
// random valid and ready, checks order, the level output, that s_tready
// drops only when full, and the one-cycle fall-through from empty.
module tb_axis_event_fifo;
  import hats_pkg::*;
  localparam int unsigned DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic s_tvalid, s_tready, m_tvalid, m_tready;
  aer_t s_tdata, m_tdata;
  logic [TS_W-1:0] s_tuser, m_tuser;
  logic [$clog2(DEPTH+1)-1:0] level;
  int unsigned checks = 0, failures = 0, n_full = 0;
  logic [AER_W+TS_W-1:0] q [$];
  int unsigned sent = 0, got = 0;

  always #5 clk = ~clk;

  axis_event_fifo #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // scoreboard on the rising edge
  always @(posedge clk) if (rst_n) begin
    check(32'(level) == q.size(), $sformatf("level %0d exp %0d", level, q.size()));
    check(s_tready == (q.size() < DEPTH), "s_tready not equal to !full");
    check(m_tvalid == (q.size() > 0), "m_tvalid not equal to !empty");
    if (q.size() == DEPTH) n_full++;
    if (m_tvalid && m_tready) begin
      check({m_tuser, m_tdata} == q[0], "data order");
      void'(q.pop_front());
      got++;
    end
    if (s_tvalid && s_tready) begin
      q.push_back({s_tuser, s_tdata});
      sent++;
    end
  end

  initial begin
    s_tvalid = 0; s_tdata = '0; s_tuser = '0; m_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fall-through: a word pushed into an empty FIFO is visible next cycle
    @(negedge clk); s_tvalid = 1; s_tdata = 24'h123456; s_tuser = 32'hCAFE;
    @(negedge clk); s_tvalid = 0;
    check(m_tvalid && m_tdata == 24'h123456 && m_tuser == 32'hCAFE, "fall-through");
    @(negedge clk); m_tready = 1;
    @(negedge clk); m_tready = 0;
    while (sent < 2000) begin
      @(negedge clk);
      if (!s_tvalid || s_tready) begin
        s_tvalid = ($urandom_range(0, 99) < 60);
        s_tdata  = aer_t'($urandom);
        s_tuser  = $urandom;
      end
      m_tready = ($urandom_range(0, 99) < ((sent / 500) % 2 ? 80 : 30));
    end
    @(negedge clk); s_tvalid = 0; m_tready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(got == sent, $sformatf("got %0d sent %0d", got, sent));
    check(n_full > 0, "FIFO never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
