// egnn_bench: stimulus and checker of the end-to-end test of egnn_accel,
// driving the accelerator only through its AXI4-Lite port as the processor
// would. It is instantiated next to the accelerator by tb_egnn_accel (base
// model, every accelerator parameter at its default) and by egnn_variant
// (other layer widths and graph-search settings, for the workload
// testbenches); its parameters must match those of the accelerator beside it.
//
// It loads random weights and biases into all four layers, sets the
// requantisation registers, then sends four recordings of events: a single
// event, one after a context clear by register, and two back to back, each
// opened by an event flagged first. After the event marked last it waits for
// the interrupt, reads the C4 pooled elements and the event count, and
// compares them with the behavioural reference of the whole pipeline.
//
// Timing checks: the empty-pipeline latency of one event (FIFO pop to pool
// input) must stay within 8 us at 200 MHz (1600 cycles) for the base model
// and 4 us for the tiny model, as reported for the original design; the
// steady-state event interval must lie between
// (MAX_EDGE + 1) / 2 * OUT_DIM / 2 of the widest layer and that plus the
// neighbour fetch and handshake cycles.
//
// With STANDALONE = 1 it also counts how often each mechanism happened and
// fails if one never did: FIFO full (bus write held), a layer waiting on the
// next one, the pool holding off input while dividing, events with no
// neighbour, candidates rejected for age or range, the context clear and the
// interrupt; it then prints the result line and ends the simulation. With
// STANDALONE = 0 it raises `done` instead and leaves the summing to the
// testbench around it.
module egnn_bench #(
  // layer widths; the defaults are the base model, 8/16/32/64 is the tiny one
  parameter int C1 = 64,
  parameter int C2 = 64,
  parameter int C3 = 64,
  parameter int C4 = 64,
  // graph search (Table of r_ch / skip step settings)
  parameter int R_CH = 100,
  parameter int SKIP = 10,
  // 0 when instantiated by a workload testbench: then it raises `done`
  // instead of ending the simulation and leaves the mechanism counts,
  // which the default run covers, unchecked
  parameter bit STANDALONE = 1
) (
  output logic        clk,
  output logic        rst_n,
  output logic [23:0] s_awaddr,
  output logic        s_awvalid,
  input  logic        s_awready,
  output logic [31:0] s_wdata,
  output logic [3:0]  s_wstrb,
  output logic        s_wvalid,
  input  logic        s_wready,
  input  logic [1:0]  s_bresp,
  input  logic        s_bvalid,
  output logic        s_bready,
  output logic [23:0] s_araddr,
  output logic        s_arvalid,
  input  logic        s_arready,
  input  logic [31:0] s_rdata,
  input  logic [1:0]  s_rresp,
  input  logic        s_rvalid,
  output logic        s_rready,
  input  logic        irq,
  // probes of the pipeline handshakes inside the accelerator
  input  logic [4:0]  p_valid,       // stage inputs: [0] generator .. [4] pool
  input  logic [4:0]  p_ready,
  input  logic        p_fifo_valid,  // FIFO pop side
  input  logic        p_fifo_ready
);
  import egnn_ref_pkg::*;
  localparam int N_CH = 700, NB = 2 * (R_CH / SKIP) + 1, CTR = R_CH / SKIP;
  localparam int CMAX = (C1 > C2 ? C1 : C2) > (C3 > C4 ? C3 : C4) ? (C1 > C2 ? C1 : C2) : (C3 > C4 ? C3 : C4);
  // per-event budget: 8 us for the base model and 4 us for the tiny model as
  // reported, otherwise scaled from the base with the summed layer widths
  // and the number of candidate neighbours
  localparam int LAT_MAX = ((C1 == 8 && C2 == 16 && C3 == 32 && C4 == 64) ? 800
                          : 1600 * (C1 + C2 + C3 + C4) / 256) * (NB + 1) / 22
                         + ((NB == 21) ? 0 : 100);
  // (MAX_EDGE + 1) / 2 * OUT_DIM / 2 cycles of the widest layer, plus the
  // neighbour fetch ((MAX_EDGE + 1) / 2 cycles) and a few handshake cycles
  localparam int II_MIN = (NB + 1) / 2 * CMAX / 2;
  localparam int II_MAX = II_MIN + (NB + 1) / 2 + 9;

  initial begin
    clk = 0; rst_n = 0;
    s_awaddr = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    s_wdata = 0; s_wstrb = 4'hF; s_arvalid = 0; s_rready = 1;
  end
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  bit done = 0;
  int n_fifo_full = 0, n_stage_wait = 0, n_pool_hold = 0, n_noneigh = 0, n_old = 0, n_oor = 0;
  int n_clear = 0, n_irq = 0;
  int conv4_out_cyc [$];
  int pop_cyc [$], pool_in_cyc [$];
  always @(posedge clk) begin
    cyc++;
    if (s_awvalid && s_wvalid && !s_awready && s_awaddr == 24'h4) n_fifo_full++;
    for (int i = 1; i < 4; i++) if (p_valid[i] && !p_ready[i]) n_stage_wait++;
    if (p_valid[4] && !p_ready[4]) n_pool_hold++;
    if (p_valid[4] && p_ready[4]) pool_in_cyc.push_back(cyc);
    if (p_fifo_valid && p_fifo_ready) pop_cyc.push_back(cyc);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  task automatic axi_write(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
  endtask

  task automatic axi_read(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1;
  end

  gen_cfg_t g;
  ctx_t c;
  conv_t L [4];

  // Expected pooled vectors and event counts of the recordings sent.
  longint exp_mean [$];        // C4 entries per recording
  int     exp_n [$];

  // Sends one recording; `first` flags its first event, which empties the
  // graph context in order with the event stream.
  task automatic send_recording(input int rec, input int n_ev, input int band, input bit first);
    longint sum [C4];
    int t;
    foreach (sum[i]) sum[i] = 0;
    t = 1000 + rec * 7;
    if (first) ctx_init(c, N_CH);
    for (int e = 0; e < n_ev; e++) begin
      int ch, tdiff[], f[2], nnb, x1[], x2[], x3[], x4[];
      bit ev[];
      t += (e % 40 == 39) ? 30000 : $urandom_range(0, 300);
      ch = band + $urandom_range(0, 24) * 5;
      if (e % 11 == 0) ch = $urandom_range(0, N_CH - 1);
      if (ch >= N_CH) ch = N_CH - 1;
      gen_ref(g, c, ch, t, tdiff, ev, f, nnb);
      if (nnb == 0) n_noneigh++;
      for (int k = 0; k < NB; k++) begin
        int cc;
        cc = ch + (k - CTR) * SKIP;
        if (cc < 0 || cc >= N_CH) n_oor++;
        else if (k != CTR && !ev[k] && c.v[cc] && cc != ch) n_old++;
      end
      conv_ref(L[0], ch, f, tdiff, ev, x1);
      conv_ref(L[1], ch, x1, tdiff, ev, x2);
      conv_ref(L[2], ch, x2, tdiff, ev, x3);
      conv_ref(L[3], ch, x3, tdiff, ev, x4);
      foreach (sum[i]) sum[i] += x4[i];
      axi_write(24'h000000, 32'(t));
      axi_write(24'h000004, {(e == n_ev - 1), (first && e == 0), 20'd0, 10'(ch)});
    end
    foreach (sum[i]) exp_mean.push_back(sum[i] / n_ev);
    exp_n.push_back(n_ev);
  endtask

  // Waits for the interrupt of the oldest recording sent and checks it.
  task automatic check_recording(input int rec);
    logic [31:0] d;
    longint m [C4];
    int n;
    foreach (m[i]) m[i] = exp_mean.pop_front();
    n = exp_n.pop_front();
    while (!irq) @(posedge clk);
    n_irq++;
    axi_read(24'h000008, d);
    check(d[0] == 1'b1 && d[31:16] == 16'(n), $sformatf("status %h for %0d events", d, n));
    for (int i = 0; i < C4; i++) begin
      axi_read(24'h001000 + 24'(4 * i), d);
      check(d == 32'(m[i]), $sformatf("rec %0d elem %0d got %0d exp %0d", rec, i, d, m[i]));
    end
    axi_write(24'h000008, 32'd1);
    @(posedge clk);
    check(!irq, "irq cleared");
  endtask

  initial begin
    static int rqm [4] = '{1, 1, 1, 1};
    static int rqs [4] = '{19, 10, 10, 10};
    static int din [4] = '{2, C1, C2, C3};
    static int dout [4] = '{C1, C2, C3, C4};
    static int win [4] = '{16, 8, 8, 8};
    g = '{n_ch: N_CH, r_ch: R_CH, skip: SKIP, r_t: 20000, fch_m: 93, fch_s: 0,
          ft_m: 1, ft_s: 5, feat_w: 16};
    ctx_init(c, N_CH);
    for (int l = 0; l < 4; l++) begin
      L[l].in_dim = din[l]; L[l].in_w = win[l]; L[l].out_dim = dout[l]; L[l].out_w = 8;
      L[l].zp = 1 << (win[l] - 1);
      L[l].r_ch = R_CH; L[l].skip = SKIP; L[l].r_t = 20000; L[l].n_ch = N_CH;
      L[l].rq_m = rqm[l]; L[l].rq_s = rqs[l];
      conv_init(L[l]);
      L[l].w = new[dout[l]];
      L[l].b = new[dout[l]];
      for (int o = 0; o < dout[l]; o++) begin
        L[l].w[o] = new[din[l] + 2];
        foreach (L[l].w[o][m])
          L[l].w[o][m] = (l == 0) ? L[l].zp + $urandom_range(0, 1200) - 600 : $urandom_range(0, 255);
        L[l].b[o] = (l == 0) ? longint'($urandom_range(0, 4000000)) - 2000000
                             : longint'($urandom_range(0, 40000)) - 20000;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      for (int o = 0; o < dout[l]; o++) begin
        for (int m = 0; m < din[l] + 2; m++)
          axi_write(24'h800000 | 24'(l << 21) | 24'(o << 11) | 24'(m << 2), 32'(L[l].w[o][m]));
        axi_write(24'h800000 | 24'(l << 21) | 24'h100000 | 24'(o << 11), 32'(L[l].b[o]));
      end
      axi_write(24'h10 + 24'(4 * l), {10'd0, 6'(rqs[l]), 16'(rqm[l])});
    end
    // one isolated event: empty-pipeline latency from FIFO pop to pool input
    begin
      int lat;
      pop_cyc.delete(); pool_in_cyc.delete();
      send_recording(0, 1, 300, 0);
      check_recording(0);
      lat = pool_in_cyc[0] - pop_cyc[0];
      $display("single-event latency %0d cycles (%0.2f us at 200 MHz)", lat, lat * 0.005);
      check(lat <= LAT_MAX, $sformatf("latency %0d cycles above %0d", lat, LAT_MAX));
    end
    axi_write(24'h00000C, 32'd1);
    n_clear++;
    ctx_init(c, N_CH);
    pool_in_cyc.delete();
    send_recording(1, 160, 100, 0);
    check_recording(1);
    begin
      int gap, mx;
      mx = 0;
      for (int i = 20; i < pool_in_cyc.size(); i++) begin
        gap = pool_in_cyc[i] - pool_in_cyc[i - 1];
        if (gap > mx) mx = gap;
      end
      $display("steady-state event interval at most %0d cycles", mx);
      check(mx >= II_MIN && mx <= II_MAX, $sformatf("event interval %0d", mx));
    end
    // two recordings back to back, each opened by a flagged first event:
    // the third arrives while the pool is still dividing for the second
    send_recording(2, 120, 400, 1);
    send_recording(3, 40, 200, 1);
    n_clear += 2;
    check_recording(2);
    check_recording(3);
    $display("fifo_full=%0d stage_wait=%0d pool_hold=%0d no_neighbour=%0d too_old=%0d out_of_range=%0d clears=%0d irqs=%0d",
             n_fifo_full, n_stage_wait, n_pool_hold, n_noneigh, n_old, n_oor, n_clear, n_irq);
    check(n_clear > 0 && n_irq == 4, "context clears and interrupts");
    if (STANDALONE) begin
      check(n_fifo_full > 0, "FIFO full seen");
      check(n_stage_wait > 0, "layer waited on the next one");
      check(n_pool_hold > 0, "pool held off input while dividing");
      check(n_noneigh > 0, "event without neighbour seen");
      check(n_old > 0, "candidate rejected by r_t seen");
      check(n_oor > 0, "out-of-range candidate seen");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1;
  end
endmodule
