// local_bus -- read side of the bus that links the M subarrays of a group.
//
// During stochastic-to-binary conversion exactly one subarray of the group,
// chosen by sel, drives its buffer-register bit to the local accumulator.
// (The other direction of the bus, the command broadcast to the subarrays,
// is plain fan-out in subarray_group.) The paper names the bus; modelling it
// as an M:1 selection is this design's choice.
//
// Interface: purely combinational; sel values >= M drive '0'.
module local_bus #(
  parameter int unsigned M = 16,
  localparam int unsigned SELW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [M-1:0]    sa_bit,
  input  logic [SELW-1:0] sel,
  output logic            bus_bit
);

  always_comb bus_bit = (32'(sel) < M) ? sa_bit[sel] : 1'b0;

endmodule
