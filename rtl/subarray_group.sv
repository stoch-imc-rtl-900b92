// subarray_group -- one group of M locally connected subarrays.
//
// The bank is built from N such groups. All subarrays of a group (and of the
// whole bank) receive the same command in the same cycle and run the same
// schedule; each one holds its own, independently generated bits of the
// stochastic operands, so together they compute M bits of the output
// bitstream in parallel (bit-parallel stochastic computing). Each subarray
// has its own MTJ switching model, which supplies the random outcome of a
// stochastic write.
//
// Stochastic-to-binary conversion: with rd_en the controller loads the bit
// (rd_row, rd_col) of every subarray into its buffer register; then, for M
// cycles, lsel walks over the subarrays, the local bus carries the selected
// bit and the local accumulator adds it (lacc_en). count then holds the
// number of ones of the group's M bitstream bits. The grouping, local bus
// and local accumulator follow the paper; the control signals are this
// design's.
module subarray_group
  import stoch_imc_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256,
  localparam int unsigned SELW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW   = $clog2(M + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sa_cmd_t         cmd,
  input  logic            rd_en,
  input  addr_t           rd_row,
  input  addr_t           rd_col,
  input  logic [SELW-1:0] lsel,
  input  logic            lacc_clr,
  input  logic            lacc_en,
  output logic [CW-1:0]   count
);

  logic [M-1:0] sa_bit;
  logic         bus_bit;

  for (genvar j = 0; j < M; j++) begin : g_sa
    logic [ROWS-1:0] sw;

    mtj_switching_model #(.ROWS(ROWS)) u_mtj (
      .clk        (clk),
      .fire       (cmd.op == SA_SBG),
      .pulse_code (cmd.data),
      .sw_outcome (sw)
    );

    subarray #(.ROWS(ROWS), .COLS(COLS)) u_sa (
      .clk        (clk),
      .rst_n      (rst_n),
      .cmd        (cmd),
      .sw_outcome (sw),
      .rd_en      (rd_en),
      .rd_row     (rd_row),
      .rd_col     (rd_col),
      .rd_bit     (sa_bit[j])
    );
  end

  local_bus #(.M(M)) u_lbus (
    .sa_bit  (sa_bit),
    .sel     (lsel),
    .bus_bit (bus_bit)
  );

  local_accumulator #(.M(M)) u_lacc (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (lacc_clr),
    .en     (lacc_en),
    .bit_in (bus_bit),
    .count  (count)
  );

endmodule
