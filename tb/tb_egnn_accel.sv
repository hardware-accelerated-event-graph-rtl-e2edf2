// tb_egnn_accel: end-to-end test of the whole accelerator at full size: the
// base model (four layers of 64 outputs, 700 channels, r_ch 100, skip step
// 10, r_t 20 ms) with every parameter of egnn_accel at its default.
//
// The accelerator is driven only through its AXI4-Lite port by egnn_bench,
// which loads random weights, sends four recordings (a single event, one
// after a context clear, two back to back opened by first-event flags),
// compares every pooled element and event count with the behavioural
// reference, checks the 8 us per-event latency budget and the steady-state
// event interval (352 to 372 cycles), and fails if any of the mechanisms
// FIFO full, layer waiting on the next, pool hold-off, no-neighbour event,
// too-old or out-of-range candidate, context clear or interrupt never
// happened. It reaches into the accelerator only to observe the handshakes
// between its stages.
module tb_egnn_accel;
  logic clk, rst_n;
  logic [23:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready, irq;

  egnn_accel dut (.*);
  egnn_bench bench (.*, .p_valid(dut.s_valid), .p_ready(dut.s_ready),
                    .p_fifo_valid(dut.fifo_valid), .p_fifo_ready(dut.fifo_ready));
endmodule
