// bank_io -- host port of a Stoch-IMC bank.
//
// The host loads the bank through this port and collects its results:
//   * host_we with host_sel = 0 writes byte host_wdata[7:0] into entry
//     host_addr of the BtoS memory (the pulse-code calibration table);
//   * host_we with host_sel = 1 writes instruction host_wdata into word
//     host_addr of the global buffer;
//   * host_start starts the program at address 0;
//   * every I_ACC instruction returns one result: res_valid pulses for one
//     cycle with res_data = number of ones of the output bitstream and
//     res_idx = its position in the program's result sequence (0, 1, ...).
// Writes are only allowed while the bank is idle (checked by an assertion).
// The paper names the bank I/O and draws it feeding the BtoS memory and
// receiving the global accumulator's result; the port protocol is this
// design's own.
//
// Timing: writes pass through a register stage (they reach the memories one
// cycle after the host presents them); results appear one cycle after the
// controller's res_valid.
module bank_io
  import stoch_imc_pkg::*;
#(
  parameter int unsigned AW = 10,
  parameter int unsigned SW = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              host_we,
  input  logic              host_sel,
  input  logic [15:0]       host_addr,
  input  inst_t             host_wdata,
  input  logic              host_start,
  output logic              res_valid,
  output logic [SW-1:0]     res_data,
  output logic [15:0]       res_idx,
  // bank side
  output logic              bt_we,
  output logic [VAL_W-1:0]  bt_waddr,
  output logic [7:0]        bt_wdata,
  output logic              gb_we,
  output logic [AW-1:0]     gb_waddr,
  output inst_t             gb_wdata,
  output logic              start,
  input  logic              busy,
  input  logic              acc_valid,
  input  logic [SW-1:0]     acc_sum
);

  logic [15:0] n_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bt_we     <= 1'b0;
      gb_we     <= 1'b0;
      bt_waddr  <= '0;
      bt_wdata  <= '0;
      gb_waddr  <= '0;
      gb_wdata  <= '0;
      start     <= 1'b0;
      res_valid <= 1'b0;
      res_data  <= '0;
      res_idx   <= '0;
      n_res     <= '0;
    end else begin
      bt_we    <= host_we && !host_sel;
      gb_we    <= host_we &&  host_sel;
      bt_waddr <= host_addr[VAL_W-1:0];
      bt_wdata <= host_wdata[7:0];
      gb_waddr <= host_addr[AW-1:0];
      gb_wdata <= host_wdata;
      start    <= host_start && !busy;
      if (host_start && !busy)
        n_res <= '0;
      res_valid <= acc_valid;
      if (acc_valid) begin
        res_data <= acc_sum;
        res_idx  <= n_res;
        n_res    <= n_res + 1'b1;
      end
    end
  end

  // The memories may only be loaded while no program runs.
  a_no_write_while_busy : assert property (@(posedge clk) disable iff (!rst_n)
    !(host_we && (busy || start)));

endmodule
