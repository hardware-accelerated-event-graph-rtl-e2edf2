// sync_fifo: single-clock first-in first-out buffer.
//
// Holds asynchronous input events ahead of the graph generator so that an
// event arriving while the generator is busy is not lost; the published
// design names this FIFO but not its depth or width. Depth and the
// valid/ready handshake on both sides are this design's choice.
//
// Interface: push side (in_valid, in_ready, in_data), pop side
// (out_valid, out_ready, out_data) with a first-word-fall-through output:
// out_data shows the oldest entry whenever out_valid is high. A push and a
// pop can happen in the same cycle. Storage is a register array.
// The occupancy assertion samples rst_n synchronously to skip the time
// before reset, while the registers use it as an asynchronous reset; lint
// reports that double use (SYNCASYNCNET). It concerns only the check, not
// the circuit.
module sync_fifo #(
  parameter int unsigned WIDTH = 35,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  wire push = in_valid  && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // Handshake rule: the FIFO never holds more than DEPTH entries. Checked
  // only out of reset, since the count is undefined before the first reset.
  always_ff @(posedge clk) begin
    if (rst_n) assert (32'(count) <= DEPTH) else $error("sync_fifo overflow");
  end
endmodule
