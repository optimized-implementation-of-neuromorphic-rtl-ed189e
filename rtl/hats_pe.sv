// hats_pe: one processing element of the CWTS (continuously weighted local
// time surface) classifier. It owns every NUM_PE-th cell of the frame and,
// for each event of those cells, updates the cell's partial sum:
//   S[cell][k] += sum_z TS(z) * W[cell][pol][k][z]
// where TS is the linear-decayed local time surface of the event built from
// the cell's memory of earlier events.
//
// Per event the controller runs these steps one after the other:
//   ACCEPT  take the event from the stream, find its local cell and its
//           position in the cell, clear the time-surface bins;
//   SCAN    read every stored event of the cell (one per cycle) through the
//           spatial filter into the time-surface bins;
//   DRAIN   one cycle for the last bin update;
//   MAC     for each class, multiply the bins with the weights (cwts_mac) and
//           add the local sum to the partial sum; in the first MAC cycle the
//           event is appended to the cell memory and Count of the cell rises.
// A temporal reset requested over AXI-Lite is applied in the idle state,
// between events: cell memories, partial sums and counts are emptied at once.
//
// Timing: with F events stored in the cell, an event occupies the PE for
// F + 3 + 23*NUM_CLASSES cycles (F + 26 at the defaults: 1 accept, F + 1 scan,
// 1 drain, and per class 1 start plus 2 MAC iterations of 11 cycles) before
// the next event is accepted.
//
// Following the paper (its PE block diagram and text): cell memories, spatial
// filter, time surface, SVM weights, multiply-accumulate, per-cell partial sums,
// temporal reset, and an equal share of the cells per PE. This design's own
// choices: the cell-to-PE interleave, the sequential scan of the cell memory,
// and the control sequence above.
module hats_pe
  import hats_pkg::*;
#(
  parameter int unsigned     PE_ID       = 0,
  parameter int unsigned     NUM_PE      = NUM_PE_DEF,
  parameter int unsigned     FRAME_M     = FRAME_M_DEF,
  parameter int unsigned     FRAME_N     = FRAME_N_DEF,
  parameter int unsigned     CELL_K      = CELL_K_DEF,
  parameter int unsigned     RHO         = RHO_DEF,
  parameter longint unsigned DELTA_T_US  = DELTA_T_US_DEF,
  parameter longint unsigned TAU_US      = TAU_US_DEF,
  parameter int unsigned     MEM_DEPTH   = MEM_DEPTH_DEF,
  parameter int unsigned     NUM_CLASSES = NUM_CLASSES_DEF,
  parameter int unsigned     MAC_ITERS   = MAC_ITERS_DEF,
  parameter int unsigned     TOTAL_W     = TOTAL_W_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  // event stream
  input  logic            s_tvalid,
  output logic            s_tready,
  input  aer_t            s_tdata,
  input  logic [TS_W-1:0] s_tuser,
  // AXI-Lite slave
  input  axil_req_t       axil_req,
  output axil_resp_t      axil_resp
);
  localparam int unsigned CELLS_X   = FRAME_M / CELL_K;
  localparam int unsigned CELLS_Y   = FRAME_N / CELL_K;
  localparam int unsigned CELLS_ALL = CELLS_X * CELLS_Y;
  localparam int unsigned CELLS     = (CELLS_ALL + NUM_PE - 1) / NUM_PE;
  localparam int unsigned CW        = (CELLS > 1) ? $clog2(CELLS) : 1;
  localparam int unsigned KW        = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1;
  localparam int unsigned BINS      = (2*RHO+1) * (2*RHO+1);
  localparam int unsigned BW        = $clog2(BINS);
  localparam int unsigned LANES     = (BINS + MAC_ITERS - 1) / MAC_ITERS;
  localparam int unsigned WORDS     = CELLS * 2 * NUM_CLASSES * MAC_ITERS;
  localparam int unsigned WORD_W    = $clog2(WORDS);
  localparam int unsigned NW        = CELLS * 2 * NUM_CLASSES * BINS;
  localparam int unsigned DW        = $clog2(MEM_DEPTH);
  localparam int unsigned FW        = $clog2(MEM_DEPTH + 1);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_DRAIN, S_MAC_START, S_MAC_WAIT} state_t;

  state_t            state;
  // current event
  logic [CW-1:0]     ev_cell;
  logic [LC_W-1:0]   ev_lx, ev_ly;
  logic              ev_pol;
  logic [TSM_W-1:0]  ev_t;
  logic [DW:0]       slot;
  logic [KW-1:0]     cls;
  logic              first_mac;
  logic              pending;
  logic [31:0]       events_q, overflow_q;

  // decode of the incoming event
  aer_addr_t   in_a;
  int unsigned in_cell;
  always_comb begin
    in_a    = aer_decode(s_tdata);
    in_cell = (32'(in_a.x) / CELL_K) * CELLS_Y + (32'(in_a.y) / CELL_K);
  end

  logic accept, treset_req, do_clear;
  assign s_tready = (state == S_IDLE) && !pending;
  assign accept   = s_tvalid && s_tready;
  assign do_clear = (state == S_IDLE) && pending;

  // ---------------------------------------------------------------- cell memory
  logic [FW-1:0] fill;
  mem_entry_t    rd_data, wr_entry;
  logic          rd_en, rd_valid_q, mem_wr, mem_ovf;

  assign rd_en    = (state == S_SCAN) && (32'(slot) < 32'(fill));
  assign mem_wr   = (state == S_MAC_START) && first_mac;
  assign wr_entry = '{pol: ev_pol, ly: ev_ly, lx: ev_lx, t: ev_t};

  cell_memory #(.CELLS(CELLS), .DEPTH(MEM_DEPTH)) u_mem (
    .clk, .rst_n, .clear(do_clear),
    .fill_cell(ev_cell), .fill,
    .rd_en, .rd_cell(ev_cell), .rd_slot(DW'(slot)), .rd_data,
    .wr_en(mem_wr), .wr_cell(ev_cell), .wr_data(wr_entry), .overflow(mem_ovf)
  );

  // ---------------------------------------------------------------- spatial filter + time surface
  logic                      hit, expired;
  logic [BW-1:0]             bin;
  logic [TSM_W-1:0]          dt;
  logic signed [TOTAL_W-1:0] ts [BINS];

  spatial_filter #(.RHO(RHO), .DELTA_T_US(DELTA_T_US)) u_filter (
    .clk, .rst_n,
    .ev_lx, .ev_ly, .ev_pol, .ev_t,
    .in_valid(rd_valid_q), .in_entry(rd_data),
    .hit, .expired, .bin, .dt
  );

  time_surface #(.RHO(RHO), .TOTAL_W(TOTAL_W), .TAU_US(TAU_US)) u_ts (
    .clk, .rst_n, .clear(accept),
    .upd_valid(hit), .upd_bin(bin), .upd_dt(dt), .ts
  );

  // ---------------------------------------------------------------- weights + MAC
  logic                      w_wr_en, w_rd_en, mac_busy, mac_done;
  logic [$clog2(NW)-1:0]     w_wr_index;
  logic signed [TOTAL_W-1:0] w_wr_data;
  logic [WORD_W-1:0]         w_rd_word, base_word;
  logic signed [TOTAL_W-1:0] w_rd_data [LANES];
  logic signed [TOTAL_W-1:0] local_sum;

  assign base_word = WORD_W'(((32'(ev_cell) * 2 + 32'(ev_pol)) * NUM_CLASSES + 32'(cls)) * MAC_ITERS);

  svm_weight_mem #(.CELLS(CELLS), .NUM_CLASSES(NUM_CLASSES), .RHO(RHO),
                   .MAC_ITERS(MAC_ITERS), .TOTAL_W(TOTAL_W)) u_weights (
    .clk, .wr_en(w_wr_en), .wr_index(w_wr_index), .wr_data(w_wr_data),
    .rd_en(w_rd_en), .rd_word(w_rd_word), .rd_data(w_rd_data)
  );

  cwts_mac #(.RHO(RHO), .MAC_ITERS(MAC_ITERS), .TOTAL_W(TOTAL_W), .WORD_W(WORD_W)) u_mac (
    .clk, .rst_n, .start(state == S_MAC_START), .base_word, .ts,
    .w_rd_en, .w_rd_word, .w_rd_data,
    .busy(mac_busy), .done(mac_done), .local_sum
  );

  // ---------------------------------------------------------------- partial sums
  logic [CW-1:0]             rd_cell;
  logic [KW-1:0]             rd_class;
  logic signed [TOTAL_W-1:0] rd_psum;
  logic [31:0]               rd_count;

  partial_sum_mem #(.CELLS(CELLS), .NUM_CLASSES(NUM_CLASSES), .TOTAL_W(TOTAL_W)) u_psum (
    .clk, .rst_n, .clear(do_clear),
    .acc_en((state == S_MAC_WAIT) && mac_done), .acc_cell(ev_cell), .acc_class(cls),
    .acc_value(local_sum),
    .cnt_en(mem_wr), .cnt_cell(ev_cell),
    .rd_cell, .rd_class, .rd_psum, .rd_count
  );

  // ---------------------------------------------------------------- AXI-Lite
  pe_axil_regs #(.CELLS(CELLS), .NUM_CLASSES(NUM_CLASSES), .RHO(RHO), .TOTAL_W(TOTAL_W)) u_regs (
    .clk, .rst_n, .req(axil_req), .resp(axil_resp),
    .treset_req, .w_wr_en, .w_wr_index, .w_wr_data,
    .rd_cell, .rd_class, .rd_psum, .rd_count,
    .st_busy(state != S_IDLE), .st_pending(pending),
    .st_events(events_q), .st_overflow(overflow_q)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ev_cell    <= '0;
      ev_lx      <= '0;
      ev_ly      <= '0;
      ev_pol     <= 1'b0;
      ev_t       <= '0;
      slot       <= '0;
      cls        <= '0;
      first_mac  <= 1'b0;
      pending    <= 1'b0;
      rd_valid_q <= 1'b0;
      events_q   <= '0;
      overflow_q <= '0;
    end else begin
      rd_valid_q <= rd_en;
      if (treset_req)    pending <= 1'b1;
      else if (do_clear) pending <= 1'b0;
      if (mem_ovf) overflow_q <= overflow_q + 1'b1;

      case (state)
        S_IDLE: if (accept) begin
          ev_cell   <= CW'(in_cell / NUM_PE);
          ev_lx     <= LC_W'(32'(in_a.x) % CELL_K);
          ev_ly     <= LC_W'(32'(in_a.y) % CELL_K);
          ev_pol    <= in_a.pol;
          ev_t      <= s_tuser[TSM_W-1:0];
          slot      <= '0;
          cls       <= '0;
          first_mac <= 1'b1;
          state     <= S_SCAN;
        end
        S_SCAN: begin
          if (rd_en) slot <= slot + 1'b1;
          else       state <= S_DRAIN;
        end
        S_DRAIN:     state <= S_MAC_START;
        S_MAC_START: begin
          first_mac <= 1'b0;
          state     <= S_MAC_WAIT;
        end
        S_MAC_WAIT: if (mac_done) begin
          if (32'(cls) == NUM_CLASSES - 1) begin
            events_q <= events_q + 1'b1;
            state    <= S_IDLE;
          end else begin
            cls   <= cls + 1'b1;
            state <= S_MAC_START;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_own_cell: assert property (@(posedge clk) disable iff (!rst_n)
                               accept |-> (in_cell % NUM_PE) == PE_ID);
  a_mac_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               state == S_MAC_START |-> !mac_busy);
endmodule
