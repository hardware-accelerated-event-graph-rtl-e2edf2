// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// full/empty flags, the count and simultaneous push and pop.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [34:0] in_data = 0, out_data;
  logic [4:0] count;
  sync_fifo #(.WIDTH(35), .DEPTH(16)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_both = 0;
  logic [34:0] q[$];
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      // push-heavy first half, pop-heavy second half
      in_valid  <= ($urandom_range(0, 99) < ((i % 1000) < 500 ? 70 : 30));
      out_ready <= ($urandom_range(0, 99) < ((i % 1000) < 500 ? 30 : 70));
      in_data   <= {$urandom, 3'($urandom)};
      @(posedge clk);
      check(32'(count) == q.size(), "count");
      check(in_ready == (q.size() < 16), "full flag");
      check(out_valid == (q.size() > 0), "empty flag");
      if (out_valid) check(out_data == q[0], "data order");
      if (!in_ready) n_full++;
      if (in_valid && in_ready && out_valid && out_ready) n_both++;
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(n_full > 0, "FIFO became full");
    check(n_both > 0, "push and pop together");
    $display("full_cycles=%0d push_and_pop=%0d", n_full, n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
