// graph_generator: builds the spectro-temporal event graph one event at a time.
//
// Every incoming event (ch, t) is connected by directed edges to the most
// recent earlier event of each channel ch + k*SKIP, k = -R_CH/SKIP ..
// +R_CH/SKIP (21 candidates for r_ch = 100, s = 10, the centre channel
// included), provided that channel holds an event no older than R_T.
// Following the published design:
//   * a 1D context memory, a two-port BRAM addressed by channel, keeps only
//     the last timestamp of each channel;
//   * the candidates are read two per cycle (one per port), so the channel
//     search takes ceil(21/2) = 11 cycles, then the new timestamp is written
//     in one cycle;
//   * the temporal search marks a candidate valid when t - t_j <= R_T; the
//     valid candidates' channels and timestamps are summed and a 32-cycle
//     divider gives their mean (ch_avg, t_avg), the event's input feature.
// This design's own choices: a per-channel valid bit marks channels that
// hold an event; it is cleared at once by `clear`, or in order with the
// event stream by an event flagged `in_first` (the first event of a new
// recording), so recordings can follow each other without a gap; channels
// outside 0..N_CH-1 are invalid candidates; an event with no valid
// neighbour takes its own (ch, t) as feature; the averages are scaled to
// FEAT_W-bit unsigned features by a multiply and a right shift
// (ch_avg*FCH_M >> FCH_S, t_avg*FT_M >> FT_S) with saturation.
//
// Interface: valid/ready on input and output. The output carries the event
// itself, the edge list (time difference and valid bit per candidate, index
// k + R_CH/SKIP) and the two features. Latency from acceptance to out_valid
// is 1 + 11 + 1 + 32 + 1 = 46 cycles at the default sizes.
// The busy outputs of the divider are left unread (lint lists them as
// unused): the state machine waits for the done pulse.
module graph_generator

#(
  parameter int unsigned N_CH   = egnn_pkg::N_CH,
  parameter int unsigned CH_W   = egnn_pkg::CH_W,
  parameter int unsigned TS_W   = egnn_pkg::TS_W,
  parameter int unsigned R_CH   = egnn_pkg::R_CH,
  parameter int unsigned SKIP   = egnn_pkg::SKIP,
  parameter int unsigned R_T    = egnn_pkg::R_T,
  parameter int unsigned FEAT_W = egnn_pkg::FEAT0_W,
  parameter int unsigned DIV_W  = egnn_pkg::DIV_W,
  parameter int unsigned FCH_M  = 93,   // 699*93 < 2^16
  parameter int unsigned FCH_S  = 0,
  parameter int unsigned FT_M   = 1,    // 32 us per feature step
  parameter int unsigned FT_S   = 5,
  localparam int unsigned NB    = 2 * (R_CH / SKIP) + 1,
  localparam int unsigned TD_W  = $clog2(R_T + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,        // forget all stored events
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [CH_W-1:0]             in_ch,
  input  logic [TS_W-1:0]             in_t,
  input  logic                        in_last,
  input  logic                        in_first,     // first event of a recording
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [CH_W-1:0]             out_ch,
  output logic [TS_W-1:0]             out_t,
  output logic                        out_last,
  output logic [NB-1:0][TD_W-1:0]     out_tdiff,
  output logic [NB-1:0]               out_evalid,
  output logic [1:0][FEAT_W-1:0]      out_feat      // [0] channel, [1] time
);
  localparam int unsigned HALF  = R_CH / SKIP;
  localparam int unsigned NPAIR = (NB + 1) / 2;
  localparam int unsigned PC_W  = $clog2(NPAIR + 1);
  localparam int unsigned K_W   = $clog2(NB + 1);
  localparam int unsigned AW    = $clog2(N_CH);

  typedef enum logic [2:0] {S_IDLE, S_SEARCH, S_DIV_START, S_DIV, S_OUT} state_t;
  state_t state;

  logic [CH_W-1:0] ev_ch;
  logic [TS_W-1:0] ev_t;
  logic            ev_last;
  logic [PC_W-1:0] pc;           // read pair counter
  logic [N_CH-1:0] ch_valid;     // channel holds an event

  // ---- context memory ------------------------------------------------------
  logic          a_en, a_we, b_en;
  logic [AW-1:0] a_addr, b_addr;
  logic [TS_W-1:0] a_rdata, b_rdata;

  tdp_ram #(.WIDTH(TS_W), .DEPTH(N_CH), .AW(AW)) u_ctx (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata(ev_t), .a_rdata,
    .b_en, .b_we(1'b0), .b_addr, .b_wdata('0), .b_rdata
  );

  // Channel of candidate k (0..NB-1), with its in-range flag.
  function automatic logic [CH_W:0] cand_ch(input logic [CH_W-1:0] ch, input int unsigned k);
    int signed c;
    c = int'(ch) + (int'(k) - int'(HALF)) * int'(SKIP);
    if (c < 0 || c >= int'(N_CH)) return {1'b0, {CH_W{1'b0}}};
    return {1'b1, CH_W'(c)};
  endfunction

  logic [K_W-1:0]  ka, kb;       // candidates read this cycle
  logic [CH_W:0]   ca, cb;
  always_comb begin
    ka = K_W'(2 * pc);
    kb = K_W'(2 * pc + 1);
    ca = cand_ch(ev_ch, 32'(ka));
    cb = cand_ch(ev_ch, 32'(kb));
    a_addr = AW'(ca[CH_W-1:0]);
    b_addr = AW'(cb[CH_W-1:0]);
    a_en = 1'b0; a_we = 1'b0; b_en = 1'b0;
    if (state == S_SEARCH && pc < PC_W'(NPAIR)) begin
      a_en = 1'b1;
      b_en = (32'(kb) < NB);
    end else if (state == S_SEARCH) begin
      // last search cycle: the new timestamp overwrites its channel
      a_en   = 1'b1;
      a_we   = 1'b1;
      a_addr = AW'(ev_ch);
    end
  end

  // Read pipeline: what the data returned this cycle belongs to.
  logic            rd_v, rd_vb;
  logic [K_W-1:0]  rd_ka, rd_kb;
  logic            rd_oka, rd_okb;   // in range and channel holds an event
  logic [CH_W-1:0] rd_cha, rd_chb;

  // Temporal search on the returned timestamps.
  logic [TS_W-1:0] da, db;
  logic            hit_a, hit_b;
  always_comb begin
    da    = ev_t - a_rdata;
    db    = ev_t - b_rdata;
    hit_a = rd_v  && rd_oka && (a_rdata <= ev_t) && (da <= TS_W'(R_T));
    hit_b = rd_vb && rd_okb && (b_rdata <= ev_t) && (db <= TS_W'(R_T));
  end

  // Accumulator of the neighbours' positions.
  logic [DIV_W-1:0] sum_ch, sum_t, n_hit;

  // ---- dividers --------------------------------------------------------------
  logic             div_start, div_done_c, div_done_t, div_busy_c, div_busy_t;
  logic [DIV_W-1:0] q_ch, q_t, r_ch_unused, r_t_unused;
  assign div_start = (state == S_DIV_START);

  seq_divider #(.W(DIV_W)) u_div_ch (
    .clk, .rst_n, .start(div_start), .dividend(sum_ch), .divisor(n_hit),
    .busy(div_busy_c), .done(div_done_c), .quotient(q_ch), .remainder(r_ch_unused));
  seq_divider #(.W(DIV_W)) u_div_t (
    .clk, .rst_n, .start(div_start), .dividend(sum_t), .divisor(n_hit),
    .busy(div_busy_t), .done(div_done_t), .quotient(q_t), .remainder(r_t_unused));

  function automatic logic [FEAT_W-1:0] scale_sat(input logic [DIV_W-1:0] v,
                                                  input int unsigned m, input int unsigned s);
    logic [DIV_W+31:0] p;
    p = ({32'd0, v} * (DIV_W+32)'(m)) >> s;
    return (p > (DIV_W+32)'({FEAT_W{1'b1}})) ? {FEAT_W{1'b1}} : FEAT_W'(p);
  endfunction

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ch_valid   <= '0;
      ev_ch      <= '0;
      ev_t       <= '0;
      ev_last    <= 1'b0;
      pc         <= '0;
      rd_v       <= 1'b0;
      rd_vb      <= 1'b0;
      rd_ka      <= '0;
      rd_kb      <= '0;
      rd_oka     <= 1'b0;
      rd_okb     <= 1'b0;
      rd_cha     <= '0;
      rd_chb     <= '0;
      sum_ch     <= '0;
      sum_t      <= '0;
      n_hit      <= '0;
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_t      <= '0;
      out_last   <= 1'b0;
      out_tdiff  <= '0;
      out_evalid <= '0;
      out_feat   <= '0;
    end else begin
      if (clear) ch_valid <= '0;
      case (state)
        S_IDLE: begin
          rd_v  <= 1'b0;
          rd_vb <= 1'b0;
          if (in_valid) begin
            if (in_first) ch_valid <= '0;   // new recording: empty context
            ev_ch      <= in_ch;
            ev_t       <= in_t;
            ev_last    <= in_last;
            pc         <= '0;
            sum_ch     <= '0;
            sum_t      <= '0;
            n_hit      <= '0;
            out_tdiff  <= '0;
            out_evalid <= '0;
            state      <= S_SEARCH;
          end
        end
        S_SEARCH: begin
          // issue side
          rd_v   <= (pc < PC_W'(NPAIR));
          rd_vb  <= (pc < PC_W'(NPAIR)) && (32'(kb) < NB);
          rd_ka  <= ka;
          rd_kb  <= kb;
          rd_oka <= ca[CH_W] && ch_valid[ca[CH_W-1:0]];
          rd_okb <= cb[CH_W] && ch_valid[cb[CH_W-1:0]];
          rd_cha <= ca[CH_W-1:0];
          rd_chb <= cb[CH_W-1:0];
          pc     <= pc + 1'b1;
          // return side: temporal search and accumulation
          if (hit_a) begin
            out_tdiff[rd_ka]  <= TD_W'(da);
            out_evalid[rd_ka] <= 1'b1;
          end
          if (hit_b) begin
            out_tdiff[rd_kb]  <= TD_W'(db);
            out_evalid[rd_kb] <= 1'b1;
          end
          sum_ch <= sum_ch + (hit_a ? DIV_W'(rd_cha) : '0) + (hit_b ? DIV_W'(rd_chb) : '0);
          sum_t  <= sum_t  + (hit_a ? DIV_W'(a_rdata) : '0) + (hit_b ? DIV_W'(b_rdata) : '0);
          n_hit  <= n_hit  + DIV_W'(hit_a) + DIV_W'(hit_b);
          if (pc == PC_W'(NPAIR)) begin
            ch_valid[ev_ch] <= 1'b1;      // written to the context memory now
            state <= S_DIV_START;
          end
        end
        S_DIV_START: begin
          rd_v  <= 1'b0;
          rd_vb <= 1'b0;
          state <= S_DIV;
        end
        S_DIV: begin
          if (div_done_c && div_done_t) begin
            out_ch    <= ev_ch;
            out_t     <= ev_t;
            out_last  <= ev_last;
            if (n_hit == '0) begin
              out_feat[0] <= scale_sat(DIV_W'(ev_ch), FCH_M, FCH_S);
              out_feat[1] <= scale_sat(DIV_W'(ev_t), FT_M, FT_S);
            end else begin
              out_feat[0] <= scale_sat(q_ch, FCH_M, FCH_S);
              out_feat[1] <= scale_sat(q_t, FT_M, FT_S);
            end
            out_valid <= 1'b1;
            state     <= S_OUT;
          end
        end
        S_OUT: begin
          if (out_ready) begin
            out_valid <= 1'b0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
