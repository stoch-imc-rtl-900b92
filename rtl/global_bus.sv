// global_bus -- read side of the bus that links the N groups of a bank.
//
// During the global phase of stochastic-to-binary conversion exactly one
// group, chosen by sel, drives its local-accumulator count (W bits) to the
// global accumulator. The paper names the bus; modelling it as an N:1
// selection is this design's choice.
//
// Interface: purely combinational; sel values >= N drive '0'.
module global_bus #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 5,
  localparam int unsigned SELW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][W-1:0] cnt,
  input  logic [SELW-1:0]     sel,
  output logic [W-1:0]        bus_cnt
);

  always_comb bus_cnt = (32'(sel) < N) ? cnt[sel] : '0;

endmodule
