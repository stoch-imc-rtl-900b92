// stoch_imc_bank -- one bank of the Stoch-IMC bit-parallel stochastic
// in-memory computing architecture, in the [N, M] configuration.
//
// N groups of M locally connected 2T-1MTJ subarrays (16 x 16 subarrays of
// 256 x 256 cells by default, the configuration the paper evaluates) run the
// same in-memory schedule in lock-step. Each subarray generates its own
// independent bits of the stochastic inputs (MTJ stochastic switching under a
// pulse chosen by the BtoS memory), computes the stochastic circuit with
// row-parallel IMC gates, and so produces its own bit(s) of the output
// bitstream: the N*M = 256 subarrays produce the 256 bits of an 8-bit
// resolution result in parallel. Stochastic-to-binary conversion counts the
// ones: M local steps in all groups at once, then N global steps (N+M steps
// instead of N*M).
//
// Blocks: bank_io (host port), global_buffer (program), bank_controller
// (global decoder), btos_memory, N x subarray_group, global_bus,
// global_accumulator.
//
// Host interface: see bank_io. `steps` is the number of in-memory time steps
// the last program took, `busy` is high while it runs, `done` pulses at its
// end.
module stoch_imc_bank
  import stoch_imc_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned M     = 16,
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 256,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(M + 1),
  localparam int unsigned SW   = $clog2(N * M + 1),
  localparam int unsigned LSW  = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned GSW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          host_we,
  input  logic          host_sel,
  input  logic [15:0]   host_addr,
  input  inst_t         host_wdata,
  input  logic          host_start,
  output logic          res_valid,
  output logic [SW-1:0] res_data,
  output logic [15:0]   res_idx,
  output logic          busy,
  output logic          done,
  output logic [31:0]   steps
);

  // bank I/O <-> memories
  logic             bt_we, gb_we, start;
  logic [VAL_W-1:0] bt_waddr;
  logic [7:0]       bt_wdata;
  logic [AW-1:0]    gb_waddr;
  inst_t            gb_wdata;

  // controller <-> memories
  logic             gb_re, bt_re;
  logic [AW-1:0]    gb_raddr;
  inst_t            gb_rdata;
  logic [VAL_W-1:0] bt_raddr;
  logic [7:0]       bt_rdata;

  // controller -> array
  sa_cmd_t          cmd;
  logic             rd_en, lacc_clr, lacc_en, gacc_clr, gacc_en, acc_valid;
  addr_t            rd_row, rd_col;
  logic [LSW-1:0]   lsel;
  logic [GSW-1:0]   gsel;

  logic [N-1:0][CW-1:0] grp_cnt;
  logic [CW-1:0]        gbus_cnt;
  logic [SW-1:0]        gsum;

  bank_io #(.AW(AW), .SW(SW)) u_io (
    .clk, .rst_n,
    .host_we, .host_sel, .host_addr, .host_wdata, .host_start,
    .res_valid, .res_data, .res_idx,
    .bt_we, .bt_waddr, .bt_wdata, .gb_we, .gb_waddr, .gb_wdata,
    .start, .busy, .acc_valid, .acc_sum(gsum)
  );

  global_buffer #(.DEPTH(DEPTH)) u_gbuf (
    .clk, .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata),
    .re(gb_re), .raddr(gb_raddr), .rdata(gb_rdata)
  );

  btos_memory #(.VAL_W(VAL_W), .CODE_W(8)) u_btos (
    .clk, .we(bt_we), .waddr(bt_waddr), .wdata(bt_wdata),
    .re(bt_re), .raddr(bt_raddr), .rdata(bt_rdata)
  );

  bank_controller #(.N(N), .M(M), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .gb_re, .gb_raddr, .gb_rdata,
    .bt_re, .bt_raddr, .bt_rdata,
    .cmd, .rd_en, .rd_row, .rd_col,
    .lsel, .lacc_clr, .lacc_en, .gsel, .gacc_clr, .gacc_en,
    .res_valid(acc_valid), .steps
  );

  for (genvar i = 0; i < N; i++) begin : g_grp
    subarray_group #(.M(M), .ROWS(ROWS), .COLS(COLS)) u_grp (
      .clk, .rst_n, .cmd, .rd_en, .rd_row, .rd_col,
      .lsel, .lacc_clr, .lacc_en,
      .count (grp_cnt[i])
    );
  end

  global_bus #(.N(N), .W(CW)) u_gbus (
    .cnt (grp_cnt), .sel (gsel), .bus_cnt (gbus_cnt)
  );

  global_accumulator #(.N(N), .M(M)) u_gacc (
    .clk, .rst_n, .clr(gacc_clr), .en(gacc_en), .cnt_in(gbus_cnt), .sum(gsum)
  );

endmodule
