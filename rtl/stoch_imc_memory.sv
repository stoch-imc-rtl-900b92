// stoch_imc_memory -- Stoch-IMC memory of NB banks working on one bitstream
// in parallel (top level).
//
// A bank produces N*M bits of every bitstream per pass. For a longer stream
// the bits can be spread over several banks instead of several passes: every
// bank holds the same program and pulse-code table, runs it on its own
// independently switching cells, and so computes a different set of N*M
// bits of each stream at the same time. The counts of the banks are added
// to give the count of the NB*N*M-bit stream, in the time of one pass.
//
// Interface: the host port of a bank (see bank_io), broadcast to all banks:
// every write goes to the same address of every bank and host_start starts
// them together. Because the banks run identical programs from the same
// cycle, they finish every accumulation in the same cycle; the memory adds
// their counts in one extra cycle (the inter-bank transfer) and presents
// res_valid / res_data (count of ones, 0..NB*N*M) / res_idx. busy, done and
// steps are those of bank 0 (all banks agree, checked by an assertion).
//
// Spreading a long bitstream over banks, with its shorter latency and a
// few cycles of transfer, follows the source's description; the broadcast
// host port, lockstep operation and the one-cycle adder are this design's
// choice. With NB = 1 (default, the evaluated 256-bit configuration) the
// memory is a single bank plus the output register.
module stoch_imc_memory
  import stoch_imc_pkg::*;
#(
  parameter int unsigned NB    = 1,
  parameter int unsigned N     = 16,
  parameter int unsigned M     = 16,
  parameter int unsigned ROWS  = 256,
  parameter int unsigned COLS  = 256,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned SW   = $clog2(N * M + 1),
  localparam int unsigned TW   = $clog2(NB * N * M + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          host_we,
  input  logic          host_sel,
  input  logic [15:0]   host_addr,
  input  inst_t         host_wdata,
  input  logic          host_start,
  output logic          res_valid,
  output logic [TW-1:0] res_data,
  output logic [15:0]   res_idx,
  output logic          busy,
  output logic          done,
  output logic [31:0]   steps
);

  logic [NB-1:0]          b_valid, b_busy, b_done;
  logic [NB-1:0][SW-1:0]  b_data;
  logic [NB-1:0][15:0]    b_idx;
  logic [NB-1:0][31:0]    b_steps;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    stoch_imc_bank #(.N(N), .M(M), .ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_bank (
      .clk, .rst_n, .host_we, .host_sel, .host_addr, .host_wdata, .host_start,
      .res_valid (b_valid[b]),
      .res_data  (b_data[b]),
      .res_idx   (b_idx[b]),
      .busy      (b_busy[b]),
      .done      (b_done[b]),
      .steps     (b_steps[b])
    );
  end

  // Inter-bank transfer: add the counts of all banks.
  logic [TW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int b = 0; b < NB; b++) sum = sum + TW'(b_data[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_data  <= '0;
      res_idx   <= '0;
    end else begin
      res_valid <= b_valid[0];
      if (b_valid[0]) begin
        res_data <= sum;
        res_idx  <= b_idx[0];
      end
    end
  end

  assign busy  = b_busy[0];
  assign done  = b_done[0];
  assign steps = b_steps[0];

  // The banks run in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (b_valid == {NB{b_valid[0]}}) && (b_busy == {NB{b_busy[0]}}));

endmodule
