// graph_conv: one event-by-event PointNetConv layer.
//
// For a new event i the layer computes, for every output element o,
//   out_o = requant( ReLU( max_{j in N(i) + self} ( bias_o +
//             sum_m (W_om - W_ZP) * [x_j || PN(P_j - P_i)]_m ) ) )
// where N(i) are the neighbours of the edge list made by the graph
// generator, x_j is the last input feature vector stored for neighbour
// channel j and the self-loop uses the event's own x_i with a zero offset.
// Batch normalisation is folded into W and bias.
//
// How it runs (published design): the layer keeps a two-port feature
// memory with the last input feature vector of every channel. The 21
// neighbour vectors are read two per cycle (11 cycles), then the event's
// own vector is written at its channel (1 cycle). The linear layer is then
// evaluated for two edges and two output elements per cycle (four
// vector_mul units, weight rows from the two ports of weight_ram), with a
// running maximum per output element: ceil(22/2) * OUT_DIM/2 = 11 * 32 = 352
// cycles at the defaults. ReLU and requantisation follow.
// This design's choices: edges are visited as pairs (0,1) .. (20, self);
// invalid edges are skipped in the maximum; requantisation is
// min(2^OUT_W - 1, (y * rq_m) >> rq_s) with run-time rq_m / rq_s; PN
// elements are appended after the features (element IN_DIM = channel,
// IN_DIM+1 = time); the feature fetch does not overlap the previous event's
// compute: out_valid rises 366 cycles after an event is accepted.
//
// Interface: valid/ready in and out; edge list and event are passed on
// unchanged with the output features for the next layer. Weight and bias
// writes (one element per cycle) must happen while the layer is idle.
module graph_conv #(
  parameter int unsigned IN_DIM  = 64,
  parameter int unsigned IN_W    = 8,
  parameter int unsigned W_W     = IN_W,
  parameter int unsigned W_ZP    = 1 << (W_W - 1),
  parameter int unsigned OUT_DIM = 64,
  parameter int unsigned OUT_W   = 8,
  parameter int unsigned N_CH    = egnn_pkg::N_CH,
  parameter int unsigned CH_W    = egnn_pkg::CH_W,
  parameter int unsigned TS_W    = egnn_pkg::TS_W,
  parameter int unsigned R_CH    = egnn_pkg::R_CH,
  parameter int unsigned SKIP    = egnn_pkg::SKIP,
  parameter int unsigned R_T     = egnn_pkg::R_T,
  parameter int unsigned BIAS_W  = 32,
  parameter int unsigned ACC_W   = 40,
  localparam int unsigned NB     = 2 * (R_CH / SKIP) + 1,
  localparam int unsigned TD_W   = $clog2(R_T + 1),
  localparam int unsigned VEC    = IN_DIM + 2,
  localparam int unsigned RW     = (OUT_DIM <= 2) ? 1 : $clog2(OUT_DIM),
  localparam int unsigned EW     = (VEC <= 2) ? 1 : $clog2(VEC)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // event in
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [CH_W-1:0]               in_ch,
  input  logic [TS_W-1:0]               in_t,
  input  logic                          in_last,
  input  logic [NB-1:0][TD_W-1:0]       in_tdiff,
  input  logic [NB-1:0]                 in_evalid,
  input  logic [IN_DIM-1:0][IN_W-1:0]   in_x,
  // event out
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [CH_W-1:0]               out_ch,
  output logic [TS_W-1:0]               out_t,
  output logic                          out_last,
  output logic [NB-1:0][TD_W-1:0]       out_tdiff,
  output logic [NB-1:0]                 out_evalid,
  output logic [OUT_DIM-1:0][OUT_W-1:0] out_x,
  // configuration
  input  logic                          wr_w_en,
  input  logic                          wr_b_en,
  input  logic [RW-1:0]                 wr_row,
  input  logic [EW-1:0]                 wr_elem,
  input  logic [BIAS_W-1:0]             wr_data,
  input  logic [15:0]                   rq_m,
  input  logic [5:0]                    rq_s
);
  localparam int unsigned HALF = R_CH / SKIP;
  localparam int unsigned NE   = NB + 1;            // edges with the self-loop
  localparam int unsigned NEP  = (NE + 1) / 2;      // edge pairs, 11
  localparam int unsigned NOP  = OUT_DIM / 2;       // output pairs, 32
  localparam int unsigned EP_W = $clog2(NEP + 1);
  localparam int unsigned OP_W = (NOP <= 2) ? 1 : $clog2(NOP);
  localparam int unsigned K_W  = $clog2(NB + 1);
  localparam int unsigned AW   = $clog2(N_CH);
  localparam int unsigned FW   = IN_DIM * IN_W;

  typedef logic [VEC-1:0][IN_W-1:0] evec_t;         // [x || pn_ch || pn_t]
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_COMP, S_DRAIN, S_OUT} state_t;

  state_t state;
  logic [EP_W-1:0] ep;            // edge pair counter
  logic [OP_W-1:0] op;            // output pair counter
  evec_t           eb [NE];       // edge input vectors
  logic [NE-1:0]   ev;            // edge valid
  logic signed [ACC_W-1:0] mx [OUT_DIM];

  logic [CH_W-1:0]         ev_ch;
  logic [TS_W-1:0]         ev_t;
  logic                    ev_last;
  logic [NB-1:0][TD_W-1:0] ev_tdiff;
  logic [NB-1:0]           ev_valid;
  logic [FW-1:0]           ev_x;

  // ---- feature memory ---------------------------------------------------
  logic          fa_en, fa_we, fb_en;
  logic [AW-1:0] fa_addr, fb_addr;
  logic [FW-1:0] fa_rdata, fb_rdata;

  tdp_ram #(.WIDTH(FW), .DEPTH(N_CH), .AW(AW)) u_feat (
    .clk,
    .a_en(fa_en), .a_we(fa_we), .a_addr(fa_addr), .a_wdata(ev_x), .a_rdata(fa_rdata),
    .b_en(fb_en), .b_we(1'b0),  .b_addr(fb_addr), .b_wdata('0),   .b_rdata(fb_rdata)
  );

  function automatic logic [AW-1:0] nb_addr(input logic [CH_W-1:0] ch, input int unsigned k);
    int signed c;
    c = int'(ch) + (int'(k) - int'(HALF)) * int'(SKIP);
    if (c < 0 || c >= int'(N_CH)) return '0;   // edge is invalid anyway
    return AW'(c);
  endfunction

  logic [K_W-1:0] ka, kb;
  always_comb begin
    ka      = K_W'(2 * ep);
    kb      = K_W'(2 * ep + 1);
    fa_en   = 1'b0;
    fa_we   = 1'b0;
    fb_en   = 1'b0;
    fa_addr = nb_addr(ev_ch, 32'(ka));
    fb_addr = nb_addr(ev_ch, 32'(kb));
    if (state == S_FETCH && ep < EP_W'(NEP)) begin
      fa_en = 1'b1;
      fb_en = (32'(kb) < NB);
    end else if (state == S_FETCH) begin
      fa_en   = 1'b1;                // own features overwrite the channel
      fa_we   = 1'b1;
      fa_addr = AW'(ev_ch);
    end
  end

  // ---- positional normalisation of the pair being fetched -----------------
  logic [K_W-1:0]  rk_a, rk_b;     // edges whose data returns this cycle
  logic            r_v;
  logic [IN_W-1:0] pnc_a, pnt_a, pnc_b, pnt_b;
  logic [TD_W-1:0] td_a, td_b;
  assign td_a = (32'(rk_a) < NB) ? ev_tdiff[rk_a] : '0;
  assign td_b = (32'(rk_b) < NB) ? ev_tdiff[rk_b] : '0;

  pos_norm #(.R_CH(R_CH), .SKIP(SKIP), .R_T(R_T), .Q(IN_W)) u_pn_a (
    .k(rk_a), .tdiff(td_a), .pn_ch(pnc_a), .pn_t(pnt_a));
  // the self-loop (k = NB) sits on port b and has offset 0: index HALF
  pos_norm #(.R_CH(R_CH), .SKIP(SKIP), .R_T(R_T), .Q(IN_W)) u_pn_b (
    .k((32'(rk_b) < NB) ? rk_b : K_W'(HALF)), .tdiff(td_b), .pn_ch(pnc_b), .pn_t(pnt_b));

  // ---- weights and the four vector multipliers ---------------------------
  logic [VEC-1:0][W_W-1:0]    wa, wb;
  logic signed [BIAS_W-1:0]   ba, bb;
  logic                       c_v;        // compute data valid this cycle
  logic [EP_W-1:0]            c_ep;
  logic [OP_W-1:0]            c_op;

  weight_ram #(.ROWS(OUT_DIM), .N(VEC), .W_W(W_W), .BIAS_W(BIAS_W)) u_w (
    .clk, .wr_w_en, .wr_b_en, .wr_row, .wr_elem, .wr_data,
    .rd_en(state == S_COMP),
    .a_row(RW'({op, 1'b0})), .b_row(RW'({op, 1'b1})),
    .a_w(wa), .b_w(wb), .a_bias(ba), .b_bias(bb));

  evec_t e0, e1;
  logic  e0v, e1v;
  always_comb begin
    e0  = eb[2 * c_ep];
    e0v = ev[2 * c_ep];
    if (2 * c_ep + 1 < NE) begin
      e1  = eb[2 * c_ep + 1];
      e1v = ev[2 * c_ep + 1];
    end else begin
      e1  = '0;
      e1v = 1'b0;
    end
  end

  logic signed [ACC_W-1:0] y00, y01, y10, y11;   // y<edge><row>
  vector_mul #(.N(VEC), .X_W(IN_W), .W_W(W_W), .W_ZP(W_ZP), .BIAS_W(BIAS_W), .ACC_W(ACC_W))
    u_vm00 (.w(wa), .x(e0), .bias(ba), .y(y00)),
    u_vm01 (.w(wb), .x(e0), .bias(bb), .y(y01)),
    u_vm10 (.w(wa), .x(e1), .bias(ba), .y(y10)),
    u_vm11 (.w(wb), .x(e1), .bias(bb), .y(y11));

  function automatic logic signed [ACC_W-1:0] max3(
      input logic signed [ACC_W-1:0] cur, input logic signed [ACC_W-1:0] p,
      input logic pv, input logic signed [ACC_W-1:0] q, input logic qv);
    logic signed [ACC_W-1:0] m;
    m = cur;
    if (pv && p > m) m = p;
    if (qv && q > m) m = q;
    return m;
  endfunction

  function automatic logic [OUT_W-1:0] requant(input logic signed [ACC_W-1:0] y,
                                               input logic [15:0] m, input logic [5:0] s);
    logic [ACC_W+15:0] p;
    if (y <= 0) return '0;                        // ReLU
    p = ((ACC_W+16)'(unsigned'(y)) * (ACC_W+16)'(m)) >> s;
    return (p > (ACC_W+16)'({OUT_W{1'b1}})) ? '1 : OUT_W'(p);
  endfunction

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ep         <= '0;
      op         <= '0;
      r_v        <= 1'b0;
      rk_a       <= '0;
      rk_b       <= '0;
      c_v        <= 1'b0;
      c_ep       <= '0;
      c_op       <= '0;
      ev         <= '0;
      ev_ch      <= '0;
      ev_t       <= '0;
      ev_last    <= 1'b0;
      ev_tdiff   <= '0;
      ev_valid   <= '0;
      ev_x       <= '0;
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_t      <= '0;
      out_last   <= 1'b0;
      out_tdiff  <= '0;
      out_evalid <= '0;
      out_x      <= '0;
      for (int i = 0; i < OUT_DIM; i++) mx[i] <= '0;
      for (int i = 0; i < NE; i++) eb[i] <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (in_valid) begin
            ev_ch    <= in_ch;
            ev_t     <= in_t;
            ev_last  <= in_last;
            ev_tdiff <= in_tdiff;
            ev_valid <= in_evalid;
            ev_x     <= in_x;
            ev       <= {1'b1, in_evalid};    // self-loop always valid
            ep       <= '0;
            r_v      <= 1'b0;
            state    <= S_FETCH;
          end
        end
        S_FETCH: begin
          r_v  <= (ep < EP_W'(NEP));
          rk_a <= ka;
          rk_b <= kb;
          ep   <= ep + 1'b1;
          if (r_v) begin
            eb[rk_a] <= {pnt_a, pnc_a, fa_rdata};
            if (32'(rk_b) < NB) eb[rk_b] <= {pnt_b, pnc_b, fb_rdata};
            else                eb[rk_b] <= {pnt_b, pnc_b, ev_x};   // self-loop
          end
          if (ep == EP_W'(NEP)) begin
            ep    <= '0;
            op    <= '0;
            state <= S_COMP;
            for (int i = 0; i < OUT_DIM; i++) mx[i] <= {1'b1, {(ACC_W-1){1'b0}}};
          end
        end
        S_COMP: begin
          c_v  <= 1'b1;
          c_ep <= ep;
          c_op <= op;
          if (op == OP_W'(NOP - 1)) begin
            op <= '0;
            if (ep == EP_W'(NEP - 1)) state <= S_DRAIN;
            else                      ep <= ep + 1'b1;
          end else begin
            op <= op + 1'b1;
          end
        end
        S_DRAIN: begin
          c_v   <= 1'b0;
          state <= S_OUT;
        end
        S_OUT: begin
          if (!out_valid) begin
            for (int i = 0; i < OUT_DIM; i++) out_x[i] <= requant(mx[i], rq_m, rq_s);
            out_ch     <= ev_ch;
            out_t      <= ev_t;
            out_last   <= ev_last;
            out_tdiff  <= ev_tdiff;
            out_evalid <= ev_valid;
            out_valid  <= 1'b1;
          end else if (out_ready) begin
            out_valid <= 1'b0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      // running maximum, one cycle behind the weight read
      if (c_v) begin
        mx[2 * c_op]     <= max3(mx[2 * c_op],     y00, e0v, y10, e1v);
        mx[2 * c_op + 1] <= max3(mx[2 * c_op + 1], y01, e0v, y11, e1v);
      end
    end
  end
endmodule
