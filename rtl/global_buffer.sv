// global_buffer -- program store of the bank controller.
//
// Holds the in-memory schedule of an application: the list of preset,
// stochastic-write, logic and accumulate instructions (stoch_imc_pkg::inst_t)
// that the offline scheduling-and-mapping step produces. The paper names a
// global buffer inside the bank controller; using it as the instruction
// store, and its depth, are this design's choices.
//
// Interface: one synchronous write port (loaded through the bank I/O) and one
// synchronous read port; rdata is valid the cycle after re.
module global_buffer
  import stoch_imc_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  inst_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output inst_t         rdata
);

  inst_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
