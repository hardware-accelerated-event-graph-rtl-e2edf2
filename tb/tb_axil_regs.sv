// tb_axil_regs: drives the AXI4-Lite slave as the processor would. Checks
// event pushes (with FIFO back-pressure holding the write), weight and bias
// write decoding, the clear pulses, requantisation registers, the status
// word and result reads through a one-cycle RAM model.
module tb_axil_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [23:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 4'hF;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic evt_valid, evt_ready = 1, evt_last, evt_first, ctx_clear, irq_clear, irq = 0;
  logic [9:0] evt_ch;
  logic [23:0] evt_t;
  logic [15:0] n_events = 16'd1234;
  logic [3:0][15:0] rq_m;
  logic [3:0][5:0] rq_s;
  logic [3:0] wr_w_en, wr_b_en;
  logic [8:0] wr_row, wr_elem;
  logic [31:0] wr_data;
  logic [5:0] res_addr;
  logic [7:0] res_data;

  axil_regs dut (.*);

  // result RAM model: registered read of 3*i+1
  always_ff @(posedge clk) res_data <= 8'(3 * res_addr + 1);

  int checks = 0, failures = 0, n_evt = 0, n_hold = 0, n_ctx = 0, n_irqc = 0;
  int n_w [4], n_b [4];
  logic [8:0] last_row, last_elem;
  logic [31:0] last_data;
  logic [9:0] last_ch; logic [23:0] last_t; logic last_last, last_first;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (evt_valid && evt_ready) begin n_evt++; last_ch = evt_ch; last_t = evt_t; last_last = evt_last; last_first = evt_first; end
    if (evt_valid && !evt_ready) n_hold++;
    if (ctx_clear) n_ctx++;
    if (irq_clear) n_irqc++;
    for (int l = 0; l < 4; l++) begin
      if (wr_w_en[l]) begin n_w[l]++; last_row = wr_row; last_elem = wr_elem; last_data = wr_data; end
      if (wr_b_en[l]) begin n_b[l]++; last_row = wr_row; last_data = wr_data; end
    end
  end

  task automatic axi_write(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    check(s_bresp == 2'b00, "write response OKAY");
    @(posedge clk);
  endtask

  task automatic axi_read(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    foreach (n_w[l]) begin n_w[l] = 0; n_b[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // events
    for (int e = 0; e < 20; e++) begin
      int ch, t;
      ch = $urandom_range(0, 699); t = $urandom_range(0, 24'hFFFFFF);
      axi_write(24'h000000, 32'(t));
      axi_write(24'h000004, {e[0], e[1], 20'd0, 10'(ch)});
      check(n_evt == e + 1 && last_ch == 10'(ch) && last_t == 24'(t) && last_last == e[0]
            && last_first == e[1], "event pushed");
    end
    // a full FIFO holds the write until space appears
    evt_ready = 0;
    fork
      axi_write(24'h000004, 32'd77);
      begin repeat (10) @(posedge clk); @(negedge clk); check(n_evt == 20, "write held while full"); evt_ready = 1; end
    join
    check(n_evt == 21 && last_ch == 10'd77 && n_hold >= 9, $sformatf("held event delivered %0d %0d %0d", n_evt, last_ch, n_hold));
    // weights and biases
    for (int l = 0; l < 4; l++) begin
      int row, el;
      row = $urandom_range(0, 63); el = $urandom_range(0, 65);
      d = $urandom;
      axi_write(24'h800000 | 24'(l << 21) | 24'(row << 11) | 24'(el << 2), d);
      check(n_w[l] == 1 && last_row == 9'(row) && last_elem == 9'(el) && last_data == d, "weight write");
      axi_write(24'h800000 | 24'(l << 21) | 24'h100000 | 24'(row << 11), d ^ 32'hFFFF);
      check(n_b[l] == 1 && last_row == 9'(row) && last_data == (d ^ 32'hFFFF), "bias write");
    end
    // requantisation registers
    for (int l = 0; l < 4; l++) axi_write(24'h10 + 24'(4 * l), {10'd0, 6'(l + 3), 16'(100 * l + 7)});
    for (int l = 0; l < 4; l++) begin
      check(rq_m[l] == 16'(100 * l + 7) && rq_s[l] == 6'(l + 3), "rq outputs");
      axi_read(24'h10 + 24'(4 * l), d);
      check(d == {10'd0, 6'(l + 3), 16'(100 * l + 7)}, "rq read back");
    end
    // control
    axi_write(24'h00000C, 32'd1);
    check(n_ctx == 1, "context clear pulse");
    irq = 1;
    axi_read(24'h000008, d);
    check(d == {16'd1234, 14'd0, 1'b0, 1'b1}, $sformatf("status %h", d));
    axi_write(24'h000008, 32'd1);
    check(n_irqc == 1, "irq clear pulse");
    // results
    for (int i = 0; i < 64; i++) begin
      axi_read(24'h001000 + 24'(4 * i), d);
      check(d == 32'((3 * i + 1) & 255), $sformatf("result %0d = %0d", i, d));
    end
    axi_read(24'h000100, d);
    check(d == 0, "unmapped reads zero");
    $display("events=%0d held_cycles=%0d", n_evt, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
