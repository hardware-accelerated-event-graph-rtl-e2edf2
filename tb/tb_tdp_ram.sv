// tb_tdp_ram: writes and reads on both ports of a 700-word RAM against an
// array model; checks the one-cycle read latency and read-before-write.
module tb_tdp_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [9:0] a_addr = 0, b_addr = 0;
  logic [23:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  tdp_ram #(.WIDTH(24), .DEPTH(700)) dut (.*);

  int checks = 0, failures = 0;
  int model [700];
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
    // fill: port a even words, port b odd words
    for (int i = 0; i < 700; i += 2) begin
      model[i] = $urandom_range(0, 24'hFFFFFF); model[i+1] = $urandom_range(0, 24'hFFFFFF);
      a_en <= 1; a_we <= 1; a_addr <= 10'(i);   a_wdata <= 24'(model[i]);
      b_en <= 1; b_we <= 1; b_addr <= 10'(i+1); b_wdata <= 24'(model[i+1]);
      @(posedge clk);
    end
    a_we <= 0; b_we <= 0;
    for (int n = 0; n < 3000; n++) begin
      int ra, rb, old;
      bit wr;
      ra = $urandom_range(0, 699); rb = $urandom_range(0, 699);
      wr = ($urandom_range(0, 3) == 0) && (ra != rb);
      a_en <= 1; a_addr <= 10'(ra); a_we <= wr; a_wdata <= 24'(n);
      b_en <= 1; b_addr <= 10'(rb); b_we <= 0;
      @(posedge clk);
      old = model[ra];
      a_we <= 0; a_en <= 0; b_en <= 0;
      #1;
      check(a_rdata == 24'(old), "port a read (old data on write)");
      check(b_rdata == 24'(model[rb]), "port b read");
      if (wr) model[ra] = n;
      // with enables low, the outputs hold
      @(posedge clk); #1;
      check(a_rdata == 24'(old), "port a holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
