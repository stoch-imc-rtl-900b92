// local_accumulator -- per-group ones counter for stochastic-to-binary
// conversion.
//
// Each group of M subarrays shares one accumulator with a 1-bit input and a
// floor(log2 M)+1-bit register (5 bits for M = 16), as the paper specifies.
// During conversion the subarrays of the group drive their result bit onto
// the local bus one after another; every cycle with en = 1 adds that bit, so
// after M cycles the register holds the number of ones the group computed.
//
// Interface: clr (synchronous) empties the register; clr has priority over
// en. Active-low asynchronous reset. count is the register itself.
module local_accumulator #(
  parameter int unsigned M = 16,
  localparam int unsigned CW = $clog2(M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic          bit_in,
  output logic [CW-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        count <= '0;
    else if (clr)      count <= '0;
    else if (en)       count <= count + CW'(bit_in);
  end

endmodule
