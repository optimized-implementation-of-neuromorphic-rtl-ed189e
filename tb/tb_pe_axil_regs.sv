// tb_pe_axil_regs: 4 cells, 2 classes, rho = 3. Checks the CTRL write pulse
// (only for bit 0 = 1), weight-load index and data for random weight writes,
// the STATUS / EVENTS / OVERFLOW / PARAMS reads, and partial-sum and count
// reads served from a model of the read port, plus a read of an unmapped
// address (0).
module tb_pe_axil_regs;
  import hats_pkg::*;
  localparam int unsigned CELLS = 4, NC = 2, NW = CELLS * 2 * NC * 49;
  logic clk = 0, rst_n = 0;
  axil_req_t  axil_req;
  axil_resp_t axil_resp;
  logic treset_req, w_wr_en;
  logic [$clog2(NW)-1:0] w_wr_index;
  logic signed [23:0] w_wr_data, rd_psum;
  logic [1:0] rd_cell;
  logic rd_class;
  logic [31:0] rd_count;
  logic st_busy, st_pending;
  logic [31:0] st_events, st_overflow;
  int unsigned checks = 0, failures = 0, n_treset = 0, n_wr = 0;
  int unsigned last_idx;
  logic signed [23:0] last_data;

  always #5 clk = ~clk;

  pe_axil_regs #(.CELLS(CELLS), .NUM_CLASSES(NC), .RHO(3), .TOTAL_W(24)) dut (
    .clk, .rst_n, .req(axil_req), .resp(axil_resp), .treset_req, .w_wr_en, .w_wr_index,
    .w_wr_data, .rd_cell, .rd_class, .rd_psum, .rd_count, .st_busy, .st_pending,
    .st_events, .st_overflow);

  `include "axil_bfm.svh"

  // read-port model: psum = -1000*cell - class, count = 7*cell + 1
  assign rd_psum  = -24'(1000 * int'(rd_cell) + int'(rd_class));
  assign rd_count = 7 * 32'(rd_cell) + 1;

  always @(posedge clk) begin
    if (treset_req) n_treset++;
    if (w_wr_en) begin n_wr++; last_idx = 32'(w_wr_index); last_data = w_wr_data; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    axil_idle();
    st_busy = 0; st_pending = 0; st_events = 0; st_overflow = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_write(32'h0, 32'h0, r);
    check(n_treset == 0, "CTRL bit0 = 0 must not reset");
    axil_write(32'h0, 32'h1, r);
    check(n_treset == 1 && r == 2'b00, "CTRL bit0 = 1 resets once");
    for (int n = 0; n < 100; n++) begin
      automatic int unsigned w = $urandom_range(0, NW - 1);
      automatic logic [31:0] v = $urandom;
      axil_write(32'h8000 + 4 * w, v, r);
      check(n_wr == n + 1 && last_idx == w && last_data == v[23:0],
            $sformatf("weight write %0d: idx %0d data %0d", w, last_idx, last_data));
    end
    st_busy = 1; st_pending = 1; st_events = 32'd1234; st_overflow = 32'd77;
    axil_read(32'h4, d, r);  check(d == 32'h3, "STATUS");
    axil_read(32'h8, d, r);  check(d == 1234, "EVENTS");
    axil_read(32'hC, d, r);  check(d == 77, "OVERFLOW");
    axil_read(32'h10, d, r); check(d == {16'(NC), 16'(CELLS)}, "PARAMS");
    for (int c = 0; c < CELLS; c++) begin
      for (int k = 0; k < NC; k++) begin
        axil_read(32'h1000 + 4 * (c * NC + k), d, r);
        check($signed(d) == -(1000 * c + k), $sformatf("psum %0d %0d = %0d", c, k, $signed(d)));
      end
      axil_read(32'h2000 + 4 * c, d, r);
      check(d == 7 * c + 1, "count");
    end
    axil_read(32'h0400, d, r); check(d == 0, "unmapped read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
