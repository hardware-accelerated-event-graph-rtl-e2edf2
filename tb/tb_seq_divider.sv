// tb_seq_divider: random and corner-case divisions of the 32-bit divider;
// checks quotient, remainder and the 32-cycle latency.
module tb_seq_divider;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [31:0] dividend = 0, divisor = 1, quotient, remainder;
  seq_divider #(.W(32)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] a, b;
      int lat;
      case (n)
        0: begin a = 32'hFFFFFFFF; b = 1; end
        1: begin a = 0; b = 7; end
        2: begin a = 5; b = 9; end
        3: begin a = 32'hFFFFFFFF; b = 32'hFFFFFFFF; end
        default: begin
          a = $urandom;
          b = (n % 3 == 0) ? 32'($urandom_range(1, 21)) : $urandom >> $urandom_range(0, 31);
          if (b == 0) b = 1;
        end
      endcase
      dividend <= a; divisor <= b; start <= 1;
      @(posedge clk);
      start <= 0;
      lat = 0;
      do begin @(posedge clk); lat++; end while (!done);
      check(lat == 33, $sformatf("latency %0d", lat));   // 32 cycles, sampled one edge later
      check(quotient == a / b && remainder == a % b,
            $sformatf("%0d / %0d gave %0d r %0d", a, b, quotient, remainder));
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
