// tb_workload_graph_search: the graph-search settings of the published
// r_ch / skip-step study run end to end with the base layer widths (64 x 4).
// The skip step is swept over 1, 5, 15 and 20 at r_ch 100, and r_ch over
// 30, 50, 200, 250 and 300 at skip step 10; the default 100 / 10 is the
// full-size testbench.
//
// Both are build-time parameters (R_CH, SKIP): they set the number of
// candidate neighbours 2 * (R_CH / SKIP) + 1 (201 at skip step 1, 61 at
// r_ch 300) and with it the edge list, the search time and the convolution
// schedule. Each setting is an instance of egnn_variant (accelerator and end-to-end checker) checked against its
// own behavioural reference, with its latency budget and event interval
// scaled by the candidate count; the results are summed into one line.
module tb_workload_graph_search;
  egnn_variant #(.R_CH(100), .SKIP(1)) u_s1 ();
  egnn_variant #(.R_CH(100), .SKIP(5)) u_s5 ();
  egnn_variant #(.R_CH(100), .SKIP(15)) u_s15 ();
  egnn_variant #(.R_CH(100), .SKIP(20)) u_s20 ();
  egnn_variant #(.R_CH(30),  .SKIP(10)) u_r30 ();
  egnn_variant #(.R_CH(50),  .SKIP(10)) u_r50 ();
  egnn_variant #(.R_CH(200), .SKIP(10)) u_r200 ();
  egnn_variant #(.R_CH(250), .SKIP(10)) u_r250 ();
  egnn_variant #(.R_CH(300), .SKIP(10)) u_r300 ();

  function automatic int sum_checks();
    return u_s1.bench.checks + u_s5.bench.checks + u_s15.bench.checks + u_s20.bench.checks
         + u_r30.bench.checks
         + u_r50.bench.checks + u_r200.bench.checks + u_r250.bench.checks + u_r300.bench.checks;
  endfunction

  function automatic int sum_failures();
    return u_s1.bench.failures + u_s5.bench.failures + u_s15.bench.failures + u_s20.bench.failures
         + u_r30.bench.failures
         + u_r50.bench.failures + u_r200.bench.failures + u_r250.bench.failures + u_r300.bench.failures;
  endfunction

  initial begin
    repeat (2500000) @(posedge u_s1.clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum_checks(), sum_failures() + 1);
    $finish;
  end

  initial begin
    wait (u_s1.bench.done && u_s5.bench.done && u_s15.bench.done && u_s20.bench.done && u_r30.bench.done
          && u_r50.bench.done && u_r200.bench.done && u_r250.bench.done && u_r300.bench.done);
    $display("r_ch 100 skip  1: failures=%0d", u_s1.bench.failures);
    $display("r_ch 100 skip  5: failures=%0d", u_s5.bench.failures);
    $display("r_ch 100 skip 15: failures=%0d", u_s15.bench.failures);
    $display("r_ch 100 skip 20: failures=%0d", u_s20.bench.failures);
    $display("r_ch  30 skip 10: failures=%0d", u_r30.bench.failures);
    $display("r_ch  50 skip 10: failures=%0d", u_r50.bench.failures);
    $display("r_ch 200 skip 10: failures=%0d", u_r200.bench.failures);
    $display("r_ch 250 skip 10: failures=%0d", u_r250.bench.failures);
    $display("r_ch 300 skip 10: failures=%0d", u_r300.bench.failures);
    $display("TB_RESULT checks=%0d failures=%0d", sum_checks(), sum_failures());
    $finish;
  end
endmodule
