// tb_graph_conv: two graph convolution layers at the base model's sizes,
// one shaped like the first layer (2 inputs of 16 bits) and one like the
// later layers (64 inputs of 8 bits), both with 64 outputs. Random weights,
// biases and events with edge lists from the reference generator are fed to
// both; every output vector is compared with the reference layer, and the
// per-event latency is checked (12 fetch/write cycles, 352 compute cycles).
module tb_graph_conv;
  import egnn_ref_pkg::*;
  localparam int N_CH = 700, NB = 21, TD_W = 15, OUT = 64;
  // accepting edge to first sampled out_valid: 12 fetch/write + 352 compute
  // + 1 drain + 1 output register = 366 cycles, plus one for sampling
  localparam int LAT = 367;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // shared event side
  logic in_valid = 0, in_last = 0, out_ready = 1;
  logic [9:0] in_ch = 0;
  logic [23:0] in_t = 0;
  logic [NB-1:0][TD_W-1:0] in_tdiff = '0;
  logic [NB-1:0] in_evalid = '0;
  // layer-1 shaped DUT
  logic [1:0][15:0] xa = '0;
  logic ra, va, la;
  logic [9:0] cha; logic [23:0] ta; logic [NB-1:0][TD_W-1:0] tda; logic [NB-1:0] eva;
  logic [OUT-1:0][7:0] ya;
  logic wa_w = 0, wa_b = 0; logic [5:0] wrow = 0; logic [6:0] welem = 0; logic [31:0] wdata = 0;
  logic [15:0] rqa_m = 1, rqb_m = 1; logic [5:0] rqa_s = 0, rqb_s = 0;
  // later-layer shaped DUT
  logic [63:0][7:0] xb = '0;
  logic rb, vb, lb;
  logic [9:0] chb; logic [23:0] tb_t; logic [NB-1:0][TD_W-1:0] tdb; logic [NB-1:0] evb;
  logic [OUT-1:0][7:0] yb;
  logic wb_w = 0, wb_b = 0;

  graph_conv #(.IN_DIM(2), .IN_W(16), .OUT_DIM(OUT), .OUT_W(8)) dut_a (
    .clk, .rst_n, .in_valid, .in_ready(ra), .in_ch, .in_t, .in_last, .in_tdiff, .in_evalid,
    .in_x(xa), .out_valid(va), .out_ready, .out_ch(cha), .out_t(ta), .out_last(la),
    .out_tdiff(tda), .out_evalid(eva), .out_x(ya),
    .wr_w_en(wa_w), .wr_b_en(wa_b), .wr_row(wrow), .wr_elem(welem[1:0]), .wr_data(wdata),
    .rq_m(rqa_m), .rq_s(rqa_s));

  graph_conv #(.IN_DIM(64), .IN_W(8), .OUT_DIM(OUT), .OUT_W(8)) dut_b (
    .clk, .rst_n, .in_valid, .in_ready(rb), .in_ch, .in_t, .in_last, .in_tdiff, .in_evalid,
    .in_x(xb), .out_valid(vb), .out_ready, .out_ch(chb), .out_t(tb_t), .out_last(lb),
    .out_tdiff(tdb), .out_evalid(evb), .out_x(yb),
    .wr_w_en(wb_w), .wr_b_en(wb_b), .wr_row(wrow), .wr_elem(welem), .wr_data(wdata),
    .rq_m(rqb_m), .rq_s(rqb_s));

  int checks = 0, failures = 0, cyc = 0;
  int n_relu0 = 0, n_sat = 0, n_mid = 0, n_skipped = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  conv_t LA, LB;
  gen_cfg_t g;
  ctx_t c;

  initial begin
    g = '{n_ch: N_CH, r_ch: 100, skip: 10, r_t: 20000, fch_m: 93, fch_s: 0,
          ft_m: 1, ft_s: 5, feat_w: 16};
    ctx_init(c, N_CH);
    LA.in_dim = 2;  LA.in_w = 16; LA.out_dim = OUT; LA.out_w = 8; LA.zp = 1 << 15;
    LB.in_dim = 64; LB.in_w = 8;  LB.out_dim = OUT; LB.out_w = 8; LB.zp = 1 << 7;
    LA.r_ch = 100; LA.skip = 10; LA.r_t = 20000; LA.n_ch = N_CH;
    LB.r_ch = 100; LB.skip = 10; LB.r_t = 20000; LB.n_ch = N_CH;
    LA.rq_m = 3; LA.rq_s = 17; LB.rq_m = 5; LB.rq_s = 12;
    conv_init(LA); conv_init(LB);
    LA.w = new[OUT]; LB.w = new[OUT]; LA.b = new[OUT]; LB.b = new[OUT];
    for (int o = 0; o < OUT; o++) begin
      LA.w[o] = new[4];
      LB.w[o] = new[66];
      foreach (LA.w[o][m]) LA.w[o][m] = LA.zp + $urandom_range(0, 1200) - 600;
      foreach (LB.w[o][m]) LB.w[o][m] = $urandom_range(0, 255);
      LA.b[o] = longint'($urandom_range(0, 4000000)) - 2000000;
      LB.b[o] = longint'($urandom_range(0, 40000)) - 20000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights and biases
    for (int o = 0; o < OUT; o++) begin
      for (int m = 0; m < 66; m++) begin
        wrow <= 6'(o); welem <= 7'(m);
        // the two layers share the write bus: one word each
        wa_w <= (m < 4); wb_w <= 0;
        wdata <= (m < 4) ? 32'(LA.w[o][m]) : 32'(0);
        @(posedge clk);
        wa_w <= 0;
        wdata <= 32'(LB.w[o][m]);
        wb_w <= 1;
        @(posedge clk);
        wb_w <= 0;
      end
      wrow <= 6'(o);
      wdata <= 32'(LA.b[o]); wa_b <= 1; @(posedge clk); wa_b <= 0;
      wdata <= 32'(LB.b[o]); wb_b <= 1; @(posedge clk); wb_b <= 0;
    end
    wb_w <= 0;
    rqa_m <= 16'(LA.rq_m); rqa_s <= 6'(LA.rq_s); rqb_m <= 16'(LB.rq_m); rqb_s <= 6'(LB.rq_s);
    @(posedge clk);
    begin
      int t;
      t = 500;
      for (int e = 0; e < 120; e++) begin
        int ch, tdiff[], f[2], nnb, t_acc, lat, xbv[], ya_ref[], yb_ref[];
        bit ev[];
        t += $urandom_range(0, 600);
        ch = $urandom_range(0, 30) * 10 + (e % 2) * 5 + 100;
        gen_ref(g, c, ch, t, tdiff, ev, f, nnb);
        xbv = new[64];
        foreach (xbv[m]) xbv[m] = $urandom_range(0, 255);
        conv_ref(LA, ch, f, tdiff, ev, ya_ref);
        conv_ref(LB, ch, xbv, tdiff, ev, yb_ref);
        for (int k = 0; k < NB; k++) begin
          in_tdiff[k] <= TD_W'(tdiff[k]);
          in_evalid[k] <= ev[k];
          if (!ev[k]) n_skipped++;
        end
        xa[0] <= 16'(f[0]); xa[1] <= 16'(f[1]);
        for (int m = 0; m < 64; m++) xb[m] <= 8'(xbv[m]);
        in_ch <= 10'(ch); in_t <= 24'(t); in_last <= (e == 119);
        in_valid <= 1;
        if (e % 4 == 0) out_ready <= 0;
        do @(posedge clk); while (!(ra && rb));
        t_acc = cyc;
        in_valid <= 0;
        do @(posedge clk); while (!(va && vb));
        lat = cyc - t_acc;
        check(lat == LAT, $sformatf("latency %0d", lat));
        if (e % 4 == 0) begin
          repeat (5) @(posedge clk);
          check(va && vb && !ra && !rb, "output held under back-pressure");
          out_ready <= 1;
        end
        check(cha == 10'(ch) && chb == 10'(ch) && ta == 24'(t) && la == (e == 119), "event passed on");
        check(tda == in_tdiff && eva == in_evalid && tdb == in_tdiff && evb == in_evalid, "edge list passed on");
        for (int o = 0; o < OUT; o++) begin
          check(ya[o] == 8'(ya_ref[o]), $sformatf("L1 e=%0d o=%0d got %0d exp %0d", e, o, ya[o], ya_ref[o]));
          check(yb[o] == 8'(yb_ref[o]), $sformatf("L2 e=%0d o=%0d got %0d exp %0d", e, o, yb[o], yb_ref[o]));
          if (yb_ref[o] == 0) n_relu0++; else if (yb_ref[o] == 255) n_sat++; else n_mid++;
          if (ya_ref[o] == 0) n_relu0++; else if (ya_ref[o] == 255) n_sat++; else n_mid++;
        end
        @(posedge clk);
      end
    end
    check(n_relu0 > 0, "ReLU clipped some outputs");
    check(n_sat > 0, "requantisation saturated some outputs");
    check(n_mid > 0, "some outputs inside the range");
    check(n_skipped > 0, "invalid edges skipped");
    $display("relu0=%0d saturated=%0d mid=%0d invalid_edges=%0d", n_relu0, n_sat, n_mid, n_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
