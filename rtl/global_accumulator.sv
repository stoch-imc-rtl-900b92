// global_accumulator -- bank-level adder for stochastic-to-binary conversion.
//
// After the N groups have counted their ones locally, their counts
// (floor(log2 M)+1 bits each) are sent over the global bus one group per
// cycle and summed into a floor(log2 N*M)+1-bit register (9 bits for the
// [16,16] configuration). The final sum is the number of ones of the output
// bitstream, i.e. its binary value. Widths follow the paper.
//
// Interface: clr (synchronous, priority over en) empties the register; each
// cycle with en = 1 adds cnt_in. Active-low asynchronous reset.
module global_accumulator #(
  parameter int unsigned N = 16,
  parameter int unsigned M = 16,
  localparam int unsigned CW = $clog2(M + 1),
  localparam int unsigned SW = $clog2(N * M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [CW-1:0] cnt_in,
  output logic [SW-1:0] sum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sum <= '0;
    else if (clr)      sum <= '0;
    else if (en)       sum <= sum + SW'(cnt_in);
  end

endmodule
