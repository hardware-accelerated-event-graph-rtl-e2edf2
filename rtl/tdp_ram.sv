// tdp_ram: two-port block RAM with one read/write port A and one read/write
// port B, synchronous read with one cycle of latency.
//
// The published design keeps two kinds of state in two-port BRAM: the 1D
// context memory of the graph generator (last timestamp per channel,
// addressed by channel) and the feature memory of every graph convolution
// (last input feature vector per channel). Both ports are used for reads
// during the neighbour search, which is what halves the search time.
// Read-before-write on the same port and undefined contents after power-up
// follow ordinary FPGA BRAM behaviour; callers keep their own valid bits.
module tdp_ram #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 700,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

  // Both ports must not write the same word in the same cycle.
  always_ff @(posedge clk) begin
    assert (!(a_en && b_en && a_we && b_we && a_addr == b_addr))
      else $error("tdp_ram write collision");
  end
endmodule
