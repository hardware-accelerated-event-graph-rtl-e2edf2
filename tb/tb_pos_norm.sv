// tb_pos_norm: every channel offset and a sweep of time differences for a
// 16-bit and an 8-bit normaliser, against real-valued scaling.
module tb_pos_norm;
  logic [4:0] k;
  logic [14:0] tdiff;
  logic [15:0] c16, t16;
  logic [7:0] c8, t8;
  pos_norm #(.Q(16)) dut16 (.k, .tdiff, .pn_ch(c16), .pn_t(t16));
  pos_norm #(.Q(8))  dut8  (.k, .tdiff, .pn_ch(c8),  .pn_t(t8));

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
    for (int kk = 0; kk < 21; kk++) begin
      k = 5'(kk); tdiff = 0; #1;
      // (dch + r_ch) / (2 r_ch) with dch = (k-10)*10
      check(c16 == 16'($rtoi(kk * 10.0 * 65535.0 / 200.0 + 0.5)), $sformatf("pn_ch16 k=%0d %0d", kk, c16));
      check(c8  ==  8'($rtoi(kk * 10.0 * 255.0 / 200.0 + 0.5)), $sformatf("pn_ch8 k=%0d %0d", kk, c8));
    end
    k = 0; tdiff = 0; #1; check(c16 == 0 && t16 == 0, "zero offsets");
    k = 20; tdiff = 20000; #1; check(c16 == 16'hFFFF && c8 == 8'hFF, "full channel scale");
    for (int td = 0; td <= 20000; td += 37) begin
      real e16, e8;
      tdiff = 15'(td); #1;
      e16 = td * 65535.0 / 20000.0;
      e8  = td * 255.0 / 20000.0;
      // fixed-point scaling may round down by at most one step
      check(real'(t16) <= e16 && real'(t16) > e16 - 1.01, $sformatf("pn_t16 td=%0d %0d", td, t16));
      check(real'(t8)  <= e8  && real'(t8)  > e8 - 1.01,  $sformatf("pn_t8 td=%0d %0d", td, t8));
    end
    tdiff = 15'd20000; #1;
    check(t16 >= 16'd65534 && t8 >= 8'd254, "pn_t near 1 at r_t");
    tdiff = 15'h7FFF; #1;
    check(t16 == 16'hFFFF && t8 == 8'hFF, "pn_t saturates beyond r_t");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
