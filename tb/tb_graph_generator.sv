// tb_graph_generator: random event streams through the graph generator,
// by default at the base sizes (700 channels, r_ch 100, skip 10, r_t 20 ms;
// R_CH and SKIP may be overridden to run the other search settings), checked
// event by event against the reference search and mean, including the
// latency of (NB + 1) / 2 + 35 cycles (46 at the defaults), out-of-range and too-old candidates, events with no
// neighbour, the context clear (by the clear input and by an event flagged
// first) and output back-pressure.
module tb_graph_generator #(
  parameter int R_CH = 100,
  parameter int SKIP = 10
);
  import egnn_ref_pkg::*;
  localparam int N_CH = 700, R_T = 20000;
  localparam int NB = 2 * (R_CH / SKIP) + 1, CTR = R_CH / SKIP, TD_W = 15;
  // LAT counts from the accepting edge to the edge at which the testbench
  // first samples out_valid high: the generator latency plus one.
  localparam int LAT = (NB + 1) / 2 + 36;

  logic clk = 0, rst_n = 0, clear = 0, in_first = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_last = 0;
  logic [9:0] in_ch = 0;
  logic [23:0] in_t = 0;
  logic out_valid, out_ready = 1, out_last;
  logic [9:0] out_ch;
  logic [23:0] out_t;
  logic [NB-1:0][TD_W-1:0] out_tdiff;
  logic [NB-1:0] out_evalid;
  logic [1:0][15:0] out_feat;

  graph_generator #(.R_CH(R_CH), .SKIP(SKIP)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_noneigh = 0, n_full = 0, n_oor = 0, n_old = 0, n_bp = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gen_cfg_t g;
    ctx_t c;
    int t;
    g = '{n_ch: N_CH, r_ch: R_CH, skip: SKIP, r_t: R_T, fch_m: 93, fch_s: 0,
          ft_m: 1, ft_s: 5, feat_w: 16};
    ctx_init(c, N_CH);
    t = 1000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int e = 0; e < 600; e++) begin
      int ch, tdiff[], f[2], nnb, t_acc, lat;
      bit ev[];
      if (e == 300) begin
        // new recording: forget the context
        clear <= 1;
        @(posedge clk);
        clear <= 0;
        ctx_init(c, N_CH);
      end
      // mostly dense bursts on a band of channels, sometimes sparse; the
      // mid-sized jumps put neighbour ages near the R_T window edge
      t += (e % 50 == 49) ? 25000 : (e % 25 == 12) ? $urandom_range(8000, 19000) : $urandom_range(0, 400);
      ch = (e % 7 == 0) ? $urandom_range(0, N_CH - 1) : $urandom_range(0, 40) * 5 + (e % 3) * 250;
      if (ch >= N_CH) ch = N_CH - 1;
      if (e == 450) ctx_init(c, N_CH);   // flagged first event of a recording
      gen_ref(g, c, ch, t, tdiff, ev, f, nnb);
      in_first <= (e == 450);
      in_valid <= 1; in_ch <= 10'(ch); in_t <= 24'(t); in_last <= (e % 100 == 99);
      do @(posedge clk); while (!in_ready);
      t_acc = cyc;
      in_valid <= 0;
      if (e % 5 == 0) out_ready <= 0;
      do @(posedge clk); while (!out_valid);
      lat = cyc - t_acc;
      if (e % 5 == 0) begin
        n_bp++;
        repeat (3) @(posedge clk);
        check(out_valid && in_ready == 0, "output held under back-pressure");
        out_ready <= 1;
        @(posedge clk);
      end
      check(lat == LAT, $sformatf("latency %0d", lat));
      check(out_ch == 10'(ch) && out_t == 24'(t) && out_last == (e % 100 == 99), "event passed on");
      for (int k = 0; k < NB; k++) begin
        int cc;
        check(out_evalid[k] == ev[k], $sformatf("edge valid e=%0d k=%0d", e, k));
        if (ev[k]) check(out_tdiff[k] == TD_W'(tdiff[k]), $sformatf("tdiff e=%0d k=%0d", e, k));
        cc = ch + (k - CTR) * SKIP;
        if (cc < 0 || cc >= N_CH) n_oor++;
        else if (c.v[cc] && !ev[k] && k != CTR) n_old++;
      end
      check(out_feat[0] == 16'(f[0]) && out_feat[1] == 16'(f[1]),
            $sformatf("features e=%0d got %0d,%0d exp %0d,%0d", e, out_feat[0], out_feat[1], f[0], f[1]));
      if (nnb == 0) n_noneigh++;
      if (nnb >= (3 * NB + 7) / 8) n_full++;   // 8 of 21 at the defaults
      @(posedge clk);
    end
    check(n_noneigh > 0, "event without neighbour seen");
    check(n_full > 0, "densely connected event seen");
    check(n_oor > 0, "out-of-range candidate seen");
    check(n_old > 0, "candidate rejected by r_t seen");
    $display("events=600 no_neighbour=%0d dense=%0d out_of_range=%0d too_old=%0d backpressure=%0d",
             n_noneigh, n_full, n_oor, n_old, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
