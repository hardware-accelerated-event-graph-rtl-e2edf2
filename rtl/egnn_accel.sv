// egnn_accel: programmable-logic part of the event-graph classifier.
//
// Events (channel, timestamp) from an artificial cochlea, sent one by one
// by the processor, flow through
//   AXI4-Lite slave -> event FIFO -> graph generator -> graph conv 1..4
//   -> global average pool -> result BRAM + interrupt,
// and every stage works on one event at a time as soon as it arrives:
// there is no frame or batch. The generator connects the event to recent
// events of every SKIP-th channel within R_CH and R_T and gives it the mean
// position of those neighbours as its two input features; each convolution
// keeps the last feature vector of every channel so that it can look up
// the neighbours' features; the pool averages the last layer's outputs over
// the recording and, on the event marked last, hands the mean vector to the
// processor, which runs the two fully connected layers in software.
//
// Defaults are the base model: 700 channels, r_ch = 100, skip step 10,
// r_t = 20 ms, four layers of 64 outputs, 16-bit first layer and 8-bit
// others. C1..C4 select other layer widths (the tiny model is 8/16/32/64).
// The convolutions are the throughput limit at about 367 cycles per event
// each (352 cycles of multiply-accumulate); they run as a pipeline, each on
// a different event.
//
// Ports: clock, active-low asynchronous reset, the AXI4-Lite slave (see
// axil_regs for the register map) and the interrupt line.
// The weight address carries 9-bit row and element fields so that layers up
// to 512 wide can be addressed; at narrower widths their upper bits are
// unused, which lint reports.
module egnn_accel #(
  parameter int unsigned N_CH       = egnn_pkg::N_CH,
  parameter int unsigned CH_W       = egnn_pkg::CH_W,
  parameter int unsigned TS_W       = egnn_pkg::TS_W,
  parameter int unsigned R_CH       = egnn_pkg::R_CH,
  parameter int unsigned SKIP       = egnn_pkg::SKIP,
  parameter int unsigned R_T        = egnn_pkg::R_T,
  parameter int unsigned C1         = 64,
  parameter int unsigned C2         = 64,
  parameter int unsigned C3         = 64,
  parameter int unsigned C4         = 64,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned ADDR_W     = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic              irq
);
  localparam int unsigned NB     = 2 * (R_CH / SKIP) + 1;
  localparam int unsigned TD_W   = $clog2(R_T + 1);
  localparam int unsigned F0_W   = egnn_pkg::FEAT0_W;
  localparam int unsigned W8     = 8;
  localparam int unsigned RES_AW = (C4 <= 2) ? 1 : $clog2(C4);

  typedef struct packed {
    logic            first;
    logic            last;
    logic [CH_W-1:0] ch;
    logic [TS_W-1:0] t;
  } event_t;

  // ---- processor link -----------------------------------------------------
  logic            evt_valid, evt_ready, evt_last, evt_first, ctx_clear, irq_clear;
  logic [CH_W-1:0] evt_ch;
  logic [TS_W-1:0] evt_t;
  logic [3:0][15:0] rq_m;
  logic [3:0][5:0]  rq_s;
  logic [3:0]       wr_w_en, wr_b_en;
  logic [8:0]       wr_row, wr_elem;
  logic [31:0]      wr_data;
  logic [RES_AW-1:0] res_addr;
  logic [W8-1:0]     res_data;
  logic [15:0]       n_events;

  axil_regs #(.ADDR_W(ADDR_W), .CH_W(CH_W), .TS_W(TS_W), .RES_AW(RES_AW), .RES_W(W8),
              .N_LAYER(4)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .evt_valid, .evt_ready, .evt_ch, .evt_t, .evt_last, .evt_first,
    .ctx_clear, .irq_clear, .irq, .n_events, .rq_m, .rq_s,
    .wr_w_en, .wr_b_en, .wr_row, .wr_elem, .wr_data,
    .res_addr, .res_data);

  // ---- event FIFO ------------------------------------------------------------
  event_t fifo_in, fifo_out;
  logic   fifo_valid, fifo_ready;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  assign fifo_in = '{first: evt_first, last: evt_last, ch: evt_ch, t: evt_t};

  sync_fifo #(.WIDTH($bits(event_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(evt_valid), .in_ready(evt_ready), .in_data(fifo_in),
    .out_valid(fifo_valid), .out_ready(fifo_ready), .out_data(fifo_out),
    .count(fifo_count));

  // ---- graph generator -------------------------------------------------------
  logic                    g_valid, g_ready, g_last;
  logic [CH_W-1:0]         g_ch;
  logic [TS_W-1:0]         g_t;
  logic [NB-1:0][TD_W-1:0] g_tdiff;
  logic [NB-1:0]           g_evalid;
  logic [1:0][F0_W-1:0]    g_feat;

  graph_generator #(.N_CH(N_CH), .CH_W(CH_W), .TS_W(TS_W), .R_CH(R_CH), .SKIP(SKIP),
                    .R_T(R_T), .FEAT_W(F0_W)) u_gen (
    .clk, .rst_n, .clear(ctx_clear),
    .in_valid(fifo_valid), .in_ready(fifo_ready),
    .in_ch(fifo_out.ch), .in_t(fifo_out.t), .in_last(fifo_out.last), .in_first(fifo_out.first),
    .out_valid(g_valid), .out_ready(g_ready), .out_ch(g_ch), .out_t(g_t),
    .out_last(g_last), .out_tdiff(g_tdiff), .out_evalid(g_evalid), .out_feat(g_feat));

  // ---- four graph convolutions -------------------------------------------------
  logic [4:0]                    s_valid, s_ready, s_last;
  logic [4:0][CH_W-1:0]          s_ch;
  logic [4:0][TS_W-1:0]          s_t;
  logic [4:0][NB-1:0][TD_W-1:0]  s_tdiff;
  logic [4:0][NB-1:0]            s_evalid;
  logic [C1-1:0][W8-1:0] x1;
  logic [C2-1:0][W8-1:0] x2;
  logic [C3-1:0][W8-1:0] x3;
  logic [C4-1:0][W8-1:0] x4;

  assign s_valid[0]  = g_valid;
  assign g_ready     = s_ready[0];
  assign s_last[0]   = g_last;
  assign s_ch[0]     = g_ch;
  assign s_t[0]      = g_t;
  assign s_tdiff[0]  = g_tdiff;
  assign s_evalid[0] = g_evalid;

  graph_conv #(.IN_DIM(2), .IN_W(F0_W), .OUT_DIM(C1), .OUT_W(W8), .N_CH(N_CH), .CH_W(CH_W),
               .TS_W(TS_W), .R_CH(R_CH), .SKIP(SKIP), .R_T(R_T)) u_conv1 (
    .clk, .rst_n,
    .in_valid(s_valid[0]), .in_ready(s_ready[0]), .in_ch(s_ch[0]), .in_t(s_t[0]),
    .in_last(s_last[0]), .in_tdiff(s_tdiff[0]), .in_evalid(s_evalid[0]), .in_x(g_feat),
    .out_valid(s_valid[1]), .out_ready(s_ready[1]), .out_ch(s_ch[1]), .out_t(s_t[1]),
    .out_last(s_last[1]), .out_tdiff(s_tdiff[1]), .out_evalid(s_evalid[1]), .out_x(x1),
    .wr_w_en(wr_w_en[0]), .wr_b_en(wr_b_en[0]), .wr_row(wr_row[$clog2(C1)-1:0]),
    .wr_elem(wr_elem[1:0]), .wr_data, .rq_m(rq_m[0]), .rq_s(rq_s[0]));

  graph_conv #(.IN_DIM(C1), .IN_W(W8), .OUT_DIM(C2), .OUT_W(W8), .N_CH(N_CH), .CH_W(CH_W),
               .TS_W(TS_W), .R_CH(R_CH), .SKIP(SKIP), .R_T(R_T)) u_conv2 (
    .clk, .rst_n,
    .in_valid(s_valid[1]), .in_ready(s_ready[1]), .in_ch(s_ch[1]), .in_t(s_t[1]),
    .in_last(s_last[1]), .in_tdiff(s_tdiff[1]), .in_evalid(s_evalid[1]), .in_x(x1),
    .out_valid(s_valid[2]), .out_ready(s_ready[2]), .out_ch(s_ch[2]), .out_t(s_t[2]),
    .out_last(s_last[2]), .out_tdiff(s_tdiff[2]), .out_evalid(s_evalid[2]), .out_x(x2),
    .wr_w_en(wr_w_en[1]), .wr_b_en(wr_b_en[1]), .wr_row(wr_row[$clog2(C2)-1:0]),
    .wr_elem(wr_elem[$clog2(C1+2)-1:0]), .wr_data, .rq_m(rq_m[1]), .rq_s(rq_s[1]));

  graph_conv #(.IN_DIM(C2), .IN_W(W8), .OUT_DIM(C3), .OUT_W(W8), .N_CH(N_CH), .CH_W(CH_W),
               .TS_W(TS_W), .R_CH(R_CH), .SKIP(SKIP), .R_T(R_T)) u_conv3 (
    .clk, .rst_n,
    .in_valid(s_valid[2]), .in_ready(s_ready[2]), .in_ch(s_ch[2]), .in_t(s_t[2]),
    .in_last(s_last[2]), .in_tdiff(s_tdiff[2]), .in_evalid(s_evalid[2]), .in_x(x2),
    .out_valid(s_valid[3]), .out_ready(s_ready[3]), .out_ch(s_ch[3]), .out_t(s_t[3]),
    .out_last(s_last[3]), .out_tdiff(s_tdiff[3]), .out_evalid(s_evalid[3]), .out_x(x3),
    .wr_w_en(wr_w_en[2]), .wr_b_en(wr_b_en[2]), .wr_row(wr_row[$clog2(C3)-1:0]),
    .wr_elem(wr_elem[$clog2(C2+2)-1:0]), .wr_data, .rq_m(rq_m[2]), .rq_s(rq_s[2]));

  graph_conv #(.IN_DIM(C3), .IN_W(W8), .OUT_DIM(C4), .OUT_W(W8), .N_CH(N_CH), .CH_W(CH_W),
               .TS_W(TS_W), .R_CH(R_CH), .SKIP(SKIP), .R_T(R_T)) u_conv4 (
    .clk, .rst_n,
    .in_valid(s_valid[3]), .in_ready(s_ready[3]), .in_ch(s_ch[3]), .in_t(s_t[3]),
    .in_last(s_last[3]), .in_tdiff(s_tdiff[3]), .in_evalid(s_evalid[3]), .in_x(x3),
    .out_valid(s_valid[4]), .out_ready(s_ready[4]), .out_ch(s_ch[4]), .out_t(s_t[4]),
    .out_last(s_last[4]), .out_tdiff(s_tdiff[4]), .out_evalid(s_evalid[4]), .out_x(x4),
    .wr_w_en(wr_w_en[3]), .wr_b_en(wr_b_en[3]), .wr_row(wr_row[$clog2(C4)-1:0]),
    .wr_elem(wr_elem[$clog2(C3+2)-1:0]), .wr_data, .rq_m(rq_m[3]), .rq_s(rq_s[3]));

  // ---- global average pool -------------------------------------------------------
  avg_pool #(.DIM(C4), .IN_W(W8), .CNT_W(16)) u_pool (
    .clk, .rst_n,
    .in_valid(s_valid[4]), .in_ready(s_ready[4]), .in_x(x4), .in_last(s_last[4]),
    .rd_addr(res_addr), .rd_data(res_data), .irq, .irq_clear, .n_events);

  // The last stage's event, timestamp and edge list are not needed by the pool.
  logic unused;
  assign unused = ^{s_ch[4], s_t[4], s_tdiff[4], s_evalid[4], fifo_count};
endmodule
