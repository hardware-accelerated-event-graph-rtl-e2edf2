// egnn_variant: the accelerator built with other layer widths (C1..C4) or
// graph-search settings (R_CH, SKIP), next to the end-to-end stimulus and
// checker egnn_bench with the same settings. The workload testbenches
// instantiate several of these at once; each raises bench.done when its
// test is over and keeps its counts in bench.checks and bench.failures.
module egnn_variant #(
  parameter int C1   = 64,
  parameter int C2   = 64,
  parameter int C3   = 64,
  parameter int C4   = 64,
  parameter int R_CH = 100,
  parameter int SKIP = 10
);
  logic clk, rst_n;
  logic [23:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready, irq;

  egnn_accel #(.C1(C1), .C2(C2), .C3(C3), .C4(C4), .R_CH(R_CH), .SKIP(SKIP)) dut (.*);
  egnn_bench #(.C1(C1), .C2(C2), .C3(C3), .C4(C4), .R_CH(R_CH), .SKIP(SKIP), .STANDALONE(0))
    bench (.*, .p_valid(dut.s_valid), .p_ready(dut.s_ready),
                    .p_fifo_valid(dut.fifo_valid), .p_fifo_ready(dut.fifo_ready));
endmodule
