// weight_ram: weight and bias memory of one graph convolution layer.
//
// One row per output element holds the N weights of that element's linear
// combination plus its (batch-norm folded) bias. Two read ports, a and b,
// each return a whole row one cycle after the address, so a layer fetches
// the weights of two output elements per cycle, as in the published design.
// Loading goes one weight (or one bias) per write, from the processor;
// that write port is this design's choice, the paper does not say how
// weights reach the memory.
module weight_ram #(
  parameter int unsigned ROWS   = 64,
  parameter int unsigned N      = 66,
  parameter int unsigned W_W    = 8,
  parameter int unsigned BIAS_W = 32,
  localparam int unsigned RW    = (ROWS <= 2) ? 1 : $clog2(ROWS),
  localparam int unsigned EW    = (N <= 2) ? 1 : $clog2(N)
) (
  input  logic                     clk,
  input  logic                     wr_w_en,
  input  logic                     wr_b_en,
  input  logic [RW-1:0]            wr_row,
  input  logic [EW-1:0]            wr_elem,
  input  logic [BIAS_W-1:0]        wr_data,
  input  logic                     rd_en,
  input  logic [RW-1:0]            a_row,
  input  logic [RW-1:0]            b_row,
  output logic [N-1:0][W_W-1:0]    a_w,
  output logic [N-1:0][W_W-1:0]    b_w,
  output logic signed [BIAS_W-1:0] a_bias,
  output logic signed [BIAS_W-1:0] b_bias
);
  logic [N-1:0][W_W-1:0] wmem [ROWS];
  logic [BIAS_W-1:0]     bmem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_w_en) wmem[wr_row][wr_elem] <= wr_data[W_W-1:0];
    if (wr_b_en) bmem[wr_row] <= wr_data;
    if (rd_en) begin
      a_w    <= wmem[a_row];
      b_w    <= wmem[b_row];
      a_bias <= bmem[a_row];
      b_bias <= bmem[b_row];
    end
  end
endmodule
