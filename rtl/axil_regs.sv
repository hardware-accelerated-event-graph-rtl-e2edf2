// axil_regs: AXI4-Lite slave between the processor and the accelerator.
//
// The published system feeds events from the processor to the logic over
// AXI4, raises an interrupt when the pooled vector is in BRAM, and lets the
// processor read that BRAM. This block is that link, reduced to AXI4-Lite
// (single beats, one transaction at a time); the register map below is this
// design's own.
//
//   byte address            access  meaning
//   0x000000 EVT_T          W       timestamp of the next event
//   0x000004 EVT_CH         W       [CH_W-1:0] channel, [31] last event of
//                                   the recording, [30] first event of a
//                                   recording (empties the graph context
//                                   before it); pushes the event with EVT_T
//                                   into the event FIFO (the write waits
//                                   while the FIFO is full)
//   0x000008 STATUS         R       [0] irq, [1] FIFO full, [31:16] events
//                                   in the last pooled recording
//                           W       [0] = 1 clears irq
//   0x00000C CTRL           W       [0] = 1 clears the graph context
//   0x000010 + 4*L RQ(L)    RW      requantisation of layer L: [15:0] m,
//                                   [21:16] shift
//   0x001000 + 4*i RESULT   R       pooled element i
//   0x800000 | L<<21 | B<<20 | row<<11 | elem<<2    W   weight (B = 0) or
//                                   bias (B = 1) of layer L
// Reads return 0 for unmapped addresses; every response is OKAY.
// Results are read from a synchronous RAM, so a read takes three cycles.
module axil_regs #(
  parameter int unsigned ADDR_W  = 24,
  parameter int unsigned CH_W    = egnn_pkg::CH_W,
  parameter int unsigned TS_W    = egnn_pkg::TS_W,
  parameter int unsigned RES_AW  = 6,
  parameter int unsigned RES_W   = 8,
  parameter int unsigned N_LAYER = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // event push
  output logic                evt_valid,
  input  logic                evt_ready,
  output logic [CH_W-1:0]     evt_ch,
  output logic [TS_W-1:0]     evt_t,
  output logic                evt_last,
  output logic                evt_first,
  // control and status
  output logic                ctx_clear,
  output logic                irq_clear,
  input  logic                irq,
  input  logic [15:0]         n_events,
  output logic [N_LAYER-1:0][15:0] rq_m,
  output logic [N_LAYER-1:0][5:0]  rq_s,
  // weight load
  output logic [N_LAYER-1:0]  wr_w_en,
  output logic [N_LAYER-1:0]  wr_b_en,
  output logic [8:0]          wr_row,
  output logic [8:0]          wr_elem,
  output logic [31:0]         wr_data,
  // result read
  output logic [RES_AW-1:0]   res_addr,
  input  logic [RES_W-1:0]    res_data
);
  localparam logic [ADDR_W-1:0] A_EVT_T  = ADDR_W'(24'h000000);
  localparam logic [ADDR_W-1:0] A_EVT_CH = ADDR_W'(24'h000004);
  localparam logic [ADDR_W-1:0] A_STATUS = ADDR_W'(24'h000008);
  localparam logic [ADDR_W-1:0] A_CTRL   = ADDR_W'(24'h00000C);

  // ---- write channel ----------------------------------------------------
  wire is_evt  = (s_awaddr == A_EVT_CH);
  wire do_wr   = s_awvalid && s_wvalid && !s_bvalid && (!is_evt || evt_ready);
  assign s_awready = do_wr;
  assign s_wready  = do_wr;
  assign s_bresp   = 2'b00;

  logic [TS_W-1:0] t_reg;
  assign evt_valid = s_awvalid && s_wvalid && !s_bvalid && is_evt;
  assign evt_ch    = s_wdata[CH_W-1:0];
  assign evt_last  = s_wdata[31];
  assign evt_first = s_wdata[30];
  assign evt_t     = t_reg;

  wire is_w     = s_awaddr[23];
  wire [1:0] wl = s_awaddr[22:21];
  assign wr_row  = s_awaddr[19:11];
  assign wr_elem = s_awaddr[10:2];
  assign wr_data = s_wdata;
  always_comb begin
    wr_w_en = '0;
    wr_b_en = '0;
    if (do_wr && is_w) begin
      if (s_awaddr[20]) wr_b_en[wl] = 1'b1;
      else              wr_w_en[wl] = 1'b1;
    end
  end
  assign ctx_clear = do_wr && (s_awaddr == A_CTRL)   && s_wdata[0];
  assign irq_clear = do_wr && (s_awaddr == A_STATUS) && s_wdata[0];

  // Write strobes are ignored: every register is written as a whole word.
  logic [3:0] unused_wstrb;
  assign unused_wstrb = s_wstrb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      t_reg    <= '0;
      for (int l = 0; l < N_LAYER; l++) begin
        rq_m[l] <= 16'd1;
        rq_s[l] <= 6'd0;
      end
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (do_wr) begin
        s_bvalid <= 1'b1;
        if (s_awaddr == A_EVT_T) t_reg <= s_wdata[TS_W-1:0];
        for (int l = 0; l < N_LAYER; l++) begin
          if (s_awaddr == ADDR_W'(32'h10 + 4 * l)) begin
            rq_m[l] <= s_wdata[15:0];
            rq_s[l] <= s_wdata[21:16];
          end
        end
      end
    end
  end

  // ---- read channel -----------------------------------------------------
  logic [ADDR_W-1:0] ra;
  logic [1:0]        rphase;     // 0 idle, 1 RAM addressed, 2 data ready
  assign s_arready = (rphase == 2'd0) && !s_rvalid;
  assign s_rresp   = 2'b00;
  assign res_addr  = ra[RES_AW+1:2];

  logic [31:0] rmux;
  always_comb begin
    rmux = '0;
    if (ra[ADDR_W-1:12] == (ADDR_W-12)'(1)) rmux = 32'(res_data);
    else if (ra == A_STATUS) rmux = {n_events, 14'd0, !evt_ready, irq};
    else
      for (int l = 0; l < N_LAYER; l++)
        if (ra == ADDR_W'(32'h10 + 4 * l)) rmux = {10'd0, rq_s[l], rq_m[l]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra       <= '0;
      rphase   <= 2'd0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      case (rphase)
        2'd0: if (s_arvalid && s_arready) begin
          ra     <= s_araddr;
          rphase <= 2'd1;
        end
        2'd1: rphase <= 2'd2;
        default: begin
          s_rdata  <= rmux;
          s_rvalid <= 1'b1;
          rphase   <= 2'd0;
        end
      endcase
    end
  end
endmodule
