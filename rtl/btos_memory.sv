// btos_memory -- binary-to-stochastic (BtoS) conversion table of a bank.
//
// A 2^VAL_W-entry table (256 bytes for the 8-bit / 256-bit resolution) that
// maps a binary input value v to the code of the write pulse whose switching
// probability is v / 2^VAL_W. The stochastic number itself is then produced
// by the MTJs: the subarrays apply that pulse to preset cells and each cell
// switches with the coded probability, so no CMOS random number generator or
// comparator is needed. Size and purpose follow the paper; the contents (the
// calibration of the device) are loaded through the bank I/O.
//
// Interface: one synchronous write port (bank I/O side) and one synchronous
// read port (controller side); rdata is valid the cycle after re.
module btos_memory #(
  parameter int unsigned VAL_W  = 8,
  parameter int unsigned CODE_W = 8
) (
  input  logic              clk,
  input  logic              we,
  input  logic [VAL_W-1:0]  waddr,
  input  logic [CODE_W-1:0] wdata,
  input  logic              re,
  input  logic [VAL_W-1:0]  raddr,
  output logic [CODE_W-1:0] rdata
);

  logic [CODE_W-1:0] mem [2**VAL_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
