// tb_weight_ram: element-wise weight and bias writes, then reads of two
// rows per cycle on ports a and b, against an array model.
module tb_weight_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_w_en = 0, wr_b_en = 0, rd_en = 0;
  logic [5:0] wr_row = 0, a_row = 0, b_row = 0;
  logic [6:0] wr_elem = 0;
  logic [31:0] wr_data = 0;
  logic [65:0][7:0] a_w, b_w;
  logic signed [31:0] a_bias, b_bias;
  weight_ram #(.ROWS(64), .N(66), .W_W(8)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] mw [64][66];
  logic [31:0] mb [64];
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
    for (int r = 0; r < 64; r++) begin
      for (int e = 0; e < 66; e++) begin
        mw[r][e] = 8'($urandom);
        wr_w_en <= 1; wr_row <= 6'(r); wr_elem <= 7'(e); wr_data <= {24'hABCDEF, mw[r][e]};
        @(posedge clk);
      end
      wr_w_en <= 0;
      mb[r] = $urandom;
      wr_b_en <= 1; wr_data <= mb[r];
      @(posedge clk);
      wr_b_en <= 0;
    end
    for (int n = 0; n < 1000; n++) begin
      int ra, rb;
      ra = $urandom_range(0, 63); rb = $urandom_range(0, 63);
      rd_en <= 1; a_row <= 6'(ra); b_row <= 6'(rb);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int e = 0; e < 66; e++) begin
        check(a_w[e] == mw[ra][e], $sformatf("port a row %0d elem %0d", ra, e));
        check(b_w[e] == mw[rb][e], $sformatf("port b row %0d elem %0d", rb, e));
      end
      check(a_bias == mb[ra] && b_bias == mb[rb], "bias");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
