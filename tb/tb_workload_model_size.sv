// tb_workload_model_size: the layer-width variants of the classifier run end
// to end. Besides the base model (64/64/64/64, the full-size testbench), the
// published variants are 8/16/32/64 (tiny), 16/32/64/64, 128 x 4 and
// 256 x 4 output features per layer, all with r_ch 100 and skip step 10.
//
// Each variant is an instance of egnn_variant (the accelerator built with
// those widths next to the end-to-end checker); all run at the same time,
// each against its own behavioural reference, and each checks its pooled vectors, its per-event latency budget and its
// steady-state event interval. The checks and failures of all instances are
// summed into one result line. The widths are a property of the hardware
// build (parameters C1..C4), not of a run-time setting.
module tb_workload_model_size;
  egnn_variant #(.C1(8),   .C2(16),  .C3(32),  .C4(64))  u_tiny ();
  egnn_variant #(.C1(16),  .C2(32),  .C3(64),  .C4(64))  u_small ();
  egnn_variant #(.C1(128), .C2(128), .C3(128), .C4(128)) u_c128 ();
  egnn_variant #(.C1(256), .C2(256), .C3(256), .C4(256)) u_c256 ();

  int checks, failures;

  initial begin
    repeat (2500000) @(posedge u_tiny.clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d",
             u_tiny.bench.checks + u_small.bench.checks + u_c128.bench.checks + u_c256.bench.checks,
             u_tiny.bench.failures + u_small.bench.failures + u_c128.bench.failures + u_c256.bench.failures + 1);
    $finish;
  end

  initial begin
    wait (u_tiny.bench.done && u_small.bench.done && u_c128.bench.done && u_c256.bench.done);
    $display("8/16/32/64:    checks=%0d failures=%0d", u_tiny.bench.checks, u_tiny.bench.failures);
    $display("16/32/64/64:   checks=%0d failures=%0d", u_small.bench.checks, u_small.bench.failures);
    $display("128 x 4:       checks=%0d failures=%0d", u_c128.bench.checks, u_c128.bench.failures);
    $display("256 x 4:       checks=%0d failures=%0d", u_c256.bench.checks, u_c256.bench.failures);
    checks   = u_tiny.bench.checks + u_small.bench.checks + u_c128.bench.checks + u_c256.bench.checks;
    failures = u_tiny.bench.failures + u_small.bench.failures + u_c128.bench.failures + u_c256.bench.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
