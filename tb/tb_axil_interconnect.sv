// tb_axil_interconnect: 3 PEs modelled as simple register slaves (16 words
// each, random response delays). Random writes and reads to all three
// windows check routing, data and that a write lands only in its own slave;
// accesses to window 3 and above must return DECERR.
module tb_axil_interconnect;
  import hats_pkg::*;
  localparam int unsigned NUM_PE = 3;
  logic clk = 0, rst_n = 0;
  axil_req_t  axil_req;
  axil_resp_t axil_resp;
  axil_req_t  m_req  [NUM_PE];
  axil_resp_t m_resp [NUM_PE];
  int unsigned checks = 0, failures = 0;
  logic [31:0] model [NUM_PE][16];

  always #5 clk = ~clk;

  axil_interconnect #(.NUM_PE(NUM_PE)) dut (.clk, .rst_n, .s_req(axil_req), .s_resp(axil_resp),
                                           .m_req, .m_resp);
  `include "axil_bfm.svh"

  // slave models: take AW+W together, answer after a random delay
  for (genvar p = 0; p < NUM_PE; p++) begin : g_slv
    logic [31:0] regs [16];
    logic bv, rv;
    logic [31:0] rd;
    logic go_w, go_r;
    always_comb begin
      m_resp[p] = '0;
      m_resp[p].awready = m_req[p].awvalid && m_req[p].wvalid && !bv && go_w;
      m_resp[p].wready  = m_resp[p].awready;
      m_resp[p].bvalid  = bv;
      m_resp[p].arready = m_req[p].arvalid && !rv && go_r;
      m_resp[p].rvalid  = rv;
      m_resp[p].rdata   = rd;
    end
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin bv <= 0; rv <= 0; rd <= 0; go_w <= 0; go_r <= 0;
        for (int i = 0; i < 16; i++) regs[i] <= 0;
      end else begin
        go_w <= ($urandom_range(0, 2) != 0);
        go_r <= ($urandom_range(0, 2) != 0);
        if (m_resp[p].awready) begin
          regs[m_req[p].awaddr[5:2]] <= m_req[p].wdata; bv <= 1;
        end else if (bv && m_req[p].bready) bv <= 0;
        if (m_resp[p].arready) begin
          rd <= regs[m_req[p].araddr[5:2]]; rv <= 1;
        end else if (rv && m_req[p].rready) rv <= 0;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    axil_idle();
    foreach (model[p, i]) model[p][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int unsigned p = $urandom_range(0, NUM_PE - 1), i = $urandom_range(0, 15);
      if ($urandom_range(0, 1)) begin
        d = $urandom;
        axil_write((p << 16) | (i << 2), d, r);
        model[p][i] = d;
        check(r == 2'b00, "write response");
      end else begin
        axil_read((p << 16) | (i << 2), d, r);
        check(d == model[p][i] && r == 2'b00, $sformatf("read PE %0d reg %0d: %h exp %h", p, i, d, model[p][i]));
      end
    end
    for (int p = 0; p < NUM_PE; p++)
      for (int i = 0; i < 16; i++) check(g_slv[0].regs[i] == model[0][i] &&
                                         g_slv[1].regs[i] == model[1][i] &&
                                         g_slv[2].regs[i] == model[2][i], "slave contents");
    axil_write(32'h3_0000, 32'h1, r);
    check(r == 2'b11, "write DECERR");
    axil_read(32'hF_0004, d, r);
    check(r == 2'b11 && d == 0, "read DECERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
