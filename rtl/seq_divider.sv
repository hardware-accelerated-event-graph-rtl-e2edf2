// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// The graph generator divides the summed neighbour channels and timestamps
// by the number of neighbours, and the average pool divides its feature sums
// by the event count. The published design gives the generator's divider a
// cost of 32 cycles; a W-bit restoring divider (W = 32 by default) takes
// exactly W cycles, which is how this one is built.
//
// Interface: pulse start with dividend and divisor; busy is high for W
// cycles and done pulses for one cycle with quotient and remainder valid
// (they stay valid until the next start). Division by zero gives an
// all-ones quotient, as restoring division naturally does.
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  dvsr;
  logic [W-1:0]  rem;
  logic [W-1:0]  quo;
  logic [CW-1:0] cnt;

  logic [W:0] shifted, trial;
  always_comb begin
    shifted = {rem, quo[W-1]};   // one extra bit for the trial subtraction
    trial   = shifted - {1'b0, dvsr};
  end

  assign quotient  = quo;
  assign remainder = rem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      dvsr <= '0;
      rem  <= '0;
      quo  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= CW'(W);
        dvsr <= divisor;
        rem  <= '0;
        quo  <= dividend;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= shifted[W-1:0];
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
