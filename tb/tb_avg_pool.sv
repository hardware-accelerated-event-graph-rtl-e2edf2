// tb_avg_pool: several recordings of random length through the average
// pool; checks every pooled element (floor of the mean), the event count,
// the interrupt and its clear, and that input is held off while dividing.
module tb_avg_pool;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_last = 0, irq, irq_clear = 0;
  logic [63:0][7:0] in_x = '0;
  logic [5:0] rd_addr = 0;
  logic [7:0] rd_data;
  logic [15:0] n_events;
  avg_pool #(.DIM(64), .IN_W(8), .CNT_W(16)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_stall = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (!in_ready) n_stall++;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      longint sum [64];
      int n, t0;
      n = (r == 0) ? 1 : $urandom_range(2, 400);
      foreach (sum[i]) sum[i] = 0;
      // inputs change on the falling edge, the handshake completes on the rising one
      for (int e = 0; e < n; e++) begin
        @(negedge clk);
        for (int i = 0; i < 64; i++) begin
          logic [7:0] v;
          v = (r == 5) ? 8'hFF : 8'($urandom_range(0, 255) >> (i % 4));
          in_x[i] = v;
          sum[i] += v;
        end
        in_valid = 1; in_last = (e == n - 1);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = 0; in_last = 0;
        if ($urandom_range(0, 3) == 0) @(posedge clk);
      end
      // while the means are computed the input is held off
      t0 = cyc;
      do begin
        @(posedge clk);
        if (!irq) check(!in_ready, "input held off while dividing");
      end while (!irq);
      check(cyc - t0 > 64 * 24, $sformatf("division took %0d cycles", cyc - t0));
      check(n_events == 16'(n), $sformatf("event count %0d exp %0d", n_events, n));
      for (int i = 0; i < 64; i++) begin
        rd_addr <= 6'(i);
        @(posedge clk); @(posedge clk);
        check(rd_data == 8'(sum[i] / n), $sformatf("rec %0d elem %0d got %0d exp %0d", r, i, rd_data, sum[i] / n));
      end
      irq_clear <= 1; @(posedge clk); irq_clear <= 0; @(posedge clk);
      check(!irq, "irq cleared");
    end
    check(n_stall > 0, "input stalled during division");
    $display("stall_cycles=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
