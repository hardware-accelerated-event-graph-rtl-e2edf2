// tb_vector_mul: random 66-element dot products with zero point 128 and
// 4-element 16-bit ones, against integer arithmetic.
module tb_vector_mul;
  logic [65:0][7:0] w8, x8;
  logic signed [31:0] b8, b16;
  logic signed [39:0] y8, y16;
  logic [3:0][15:0] w16, x16;
  vector_mul #(.N(66), .X_W(8), .W_W(8), .W_ZP(128)) dut8 (.w(w8), .x(x8), .bias(b8), .y(y8));
  vector_mul #(.N(4), .X_W(16), .W_W(16), .W_ZP(32768)) dut16 (.w(w16), .x(x16), .bias(b16), .y(y16));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint e8, e16;
      for (int i = 0; i < 66; i++) begin
        w8[i] = (n == 0) ? 8'hFF : (n == 1) ? 8'h00 : 8'($urandom);
        x8[i] = (n < 2) ? 8'hFF : 8'($urandom);
      end
      for (int i = 0; i < 4; i++) begin
        w16[i] = (n == 0) ? 16'h0000 : 16'($urandom);
        x16[i] = (n == 0) ? 16'hFFFF : 16'($urandom);
      end
      b8 = $signed($urandom) >>> 8;
      b16 = $signed($urandom);
      #1;
      e8 = b8; e16 = b16;
      for (int i = 0; i < 66; i++) e8 += (longint'(w8[i]) - 128) * longint'(x8[i]);
      for (int i = 0; i < 4; i++) e16 += (longint'(w16[i]) - 32768) * longint'(x16[i]);
      check(longint'(y8) == e8, $sformatf("8-bit row %0d: %0d vs %0d", n, y8, e8));
      check(longint'(y16) == e16, $sformatf("16-bit row %0d: %0d vs %0d", n, y16, e16));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
