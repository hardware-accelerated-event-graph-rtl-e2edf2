// avg_pool: global average pooling over all events of one recording.
//
// Every arriving feature vector of the last graph convolution is added to
// one accumulator register per element and an event counter is
// incremented. When the vector flagged as the recording's last event has
// been added, each accumulator is divided by the counter; the means are
// written to a result BRAM that the processor reads, and an interrupt flag
// is raised. That much follows the published design.
// This design's choices: one shared sequential divider (SUM_W cycles per
// element, so about DIM * (SUM_W + 2) cycles in all, during which new
// events are held off by in_ready = 0); the mean is rounded down; the
// accumulators and counter are cleared once the means are written; the
// interrupt stays high until irq_clear. A recording longer than
// 2^CNT_W - 1 events saturates the counter and its sums.
//
// Interface: valid/ready input of DIM unsigned IN_W-bit elements with a
// `last` flag; result read port rd_addr -> rd_data one cycle later.
// The divider's busy and remainder outputs are left unread (lint lists them
// as unused): the state machine waits for its done pulse and the mean is
// the quotient alone.
module avg_pool #(
  parameter int unsigned DIM   = 64,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned CNT_W = 16,
  localparam int unsigned SUM_W = IN_W + CNT_W,
  localparam int unsigned AW    = (DIM <= 2) ? 1 : $clog2(DIM)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [DIM-1:0][IN_W-1:0]   in_x,
  input  logic                       in_last,
  input  logic [AW-1:0]              rd_addr,
  output logic [IN_W-1:0]            rd_data,
  output logic                       irq,
  input  logic                       irq_clear,
  output logic [CNT_W-1:0]           n_events     // events of the last pooled recording
);
  typedef enum logic [1:0] {S_ACC, S_DIV_START, S_DIV_WAIT} state_t;
  state_t state;

  logic [SUM_W-1:0] acc [DIM];
  logic [CNT_W-1:0] cnt;
  logic [AW-1:0]    idx;
  logic [IN_W-1:0]  res [DIM];

  logic             d_start, d_busy, d_done;
  logic [SUM_W-1:0] d_q, d_r;
  assign d_start = (state == S_DIV_START);

  seq_divider #(.W(SUM_W)) u_div (
    .clk, .rst_n, .start(d_start), .dividend(acc[idx]), .divisor(SUM_W'(cnt)),
    .busy(d_busy), .done(d_done), .quotient(d_q), .remainder(d_r));

  assign in_ready = (state == S_ACC);

  always_ff @(posedge clk) begin
    rd_data <= res[rd_addr];
    if (state == S_DIV_WAIT && d_done)
      res[idx] <= (d_q > SUM_W'({IN_W{1'b1}})) ? '1 : IN_W'(d_q);
  end

  wire sat = (cnt == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_ACC;
      cnt      <= '0;
      idx      <= '0;
      irq      <= 1'b0;
      n_events <= '0;
      for (int i = 0; i < DIM; i++) acc[i] <= '0;
    end else begin
      if (irq_clear) irq <= 1'b0;
      case (state)
        S_ACC: begin
          if (in_valid) begin
            if (!sat) begin
              for (int i = 0; i < DIM; i++) acc[i] <= acc[i] + SUM_W'(in_x[i]);
              cnt <= cnt + 1'b1;
            end
            if (in_last) begin
              idx   <= '0;
              state <= S_DIV_START;
            end
          end
        end
        S_DIV_START: state <= S_DIV_WAIT;
        S_DIV_WAIT: begin
          if (d_done) begin
            if (idx == AW'(DIM - 1)) begin
              state    <= S_ACC;
              irq      <= 1'b1;
              n_events <= cnt;
              cnt      <= '0;
              for (int i = 0; i < DIM; i++) acc[i] <= '0;
            end else begin
              idx   <= idx + 1'b1;
              state <= S_DIV_START;
            end
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
