// bank_controller -- global decoder of a Stoch-IMC bank.
//
// Runs the schedule held in the global buffer, one instruction after the
// other, and turns it into in-memory steps that are broadcast to every
// subarray of the bank:
//
//   I_PRESET, I_LOGIC  one subarray command (one in-memory step). An I_LOGIC
//                      with pre_en also presets pre_col to imm[0] in the
//                      same step (preset overlapped with the logic step).
//   I_SBG              the binary value imm is looked up in the BtoS memory;
//                      the returned pulse code goes out with an SA_SBG
//                      command (one in-memory step).
//   I_ACC              stochastic-to-binary conversion of the bit
//                      (row_first, in_col[0]) over all N*M subarrays: one
//                      cycle loads every buffer register and clears the
//                      accumulators, M cycles of local accumulation run in
//                      all groups in parallel, then N cycles of global
//                      accumulation; one more cycle presents the result
//                      (res_valid, the sum itself comes from the global
//                      accumulator). This N+M-step scheme is the paper's.
//   I_NOP, I_HALT      nothing / end of program (done pulses for one cycle).
//
// Timing: an instruction is fetched (1 cycle) and decoded (1 cycle; I_SBG
// needs one more for the BtoS lookup). The subarray command it produces is
// presented during the fetch of the next instruction, so a stream of
// preset/logic instructions issues one step every two cycles. `steps` counts
// in-memory steps (1 per preset/write/logic, N+M per accumulation), the
// paper's time-step measure. The instruction set and fetch scheme are this
// design's own.
module bank_controller
  import stoch_imc_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned M     = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned LSW  = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned GSW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // global buffer read port
  output logic           gb_re,
  output logic [AW-1:0]  gb_raddr,
  input  inst_t          gb_rdata,
  // BtoS memory read port
  output logic           bt_re,
  output logic [VAL_W-1:0] bt_raddr,
  input  logic [7:0]     bt_rdata,
  // subarray command broadcast
  output sa_cmd_t        cmd,
  output logic           rd_en,
  output addr_t          rd_row,
  output addr_t          rd_col,
  // accumulation control
  output logic [LSW-1:0] lsel,
  output logic           lacc_clr,
  output logic           lacc_en,
  output logic [GSW-1:0] gsel,
  output logic           gacc_clr,
  output logic           gacc_en,
  output logic           res_valid,
  output logic [31:0]    steps
);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_SBG, S_ACC_RD, S_ACC_LOCAL, S_ACC_GLOBAL, S_ACC_OUT
  } state_e;

  state_e        state;
  logic [AW-1:0] pc;
  inst_t         inst_q;
  logic [15:0]   cnt;

  function automatic sa_cmd_t to_cmd(inst_t i, sa_op_e op, logic [7:0] data);
    sa_cmd_t c;
    c.op        = op;
    c.gate      = i.gate;
    c.row_first = i.row_first;
    c.row_last  = i.row_last;
    c.row_shift = i.row_shift;
    c.in_col    = i.in_col;
    c.out_col   = i.out_col;
    c.pre_en    = (op == SA_LOGIC) && i.pre_en;
    c.pre_col   = i.pre_col;
    c.data      = data;
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      inst_q <= '0;
      cnt    <= '0;
      cmd    <= '0;
      steps  <= '0;
      done   <= 1'b0;
    end else begin
      cmd  <= '0;       // SA_NOP unless a step is issued below
      done <= 1'b0;
      unique case (state)
        S_IDLE:
          if (start) begin
            pc    <= '0;
            steps <= '0;
            state <= S_FETCH;
          end
        S_FETCH:
          state <= S_DECODE;
        S_DECODE: begin
          inst_q <= gb_rdata;
          unique case (gb_rdata.op)
            I_PRESET: begin
              cmd   <= to_cmd(gb_rdata, SA_PRESET, gb_rdata.imm);
              steps <= steps + 1;
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
            I_LOGIC: begin
              cmd   <= to_cmd(gb_rdata, SA_LOGIC, gb_rdata.imm);
              steps <= steps + 1;
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
            I_SBG:
              state <= S_SBG;
            I_ACC:
              state <= S_ACC_RD;
            I_HALT: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            default: begin
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
          endcase
        end
        S_SBG: begin
          cmd   <= to_cmd(inst_q, SA_SBG, bt_rdata);
          steps <= steps + 1;
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        S_ACC_RD: begin
          cnt   <= '0;
          state <= S_ACC_LOCAL;
        end
        S_ACC_LOCAL:
          if (cnt == 16'(M - 1)) begin
            cnt   <= '0;
            state <= S_ACC_GLOBAL;
          end else
            cnt <= cnt + 1'b1;
        S_ACC_GLOBAL:
          if (cnt == 16'(N - 1)) begin
            cnt   <= '0;
            steps <= steps + 32'(N + M);
            state <= S_ACC_OUT;
          end else
            cnt <= cnt + 1'b1;
        S_ACC_OUT: begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    gb_re     = (state == S_FETCH);
    gb_raddr  = pc;
    bt_re     = (state == S_DECODE) && (gb_rdata.op == I_SBG);
    bt_raddr  = gb_rdata.imm;
    rd_en     = (state == S_ACC_RD);
    rd_row    = inst_q.row_first;
    rd_col    = inst_q.in_col[0];
    lacc_clr  = (state == S_ACC_RD);
    gacc_clr  = (state == S_ACC_RD);
    lacc_en   = (state == S_ACC_LOCAL);
    gacc_en   = (state == S_ACC_GLOBAL);
    lsel      = LSW'(cnt);
    gsel      = GSW'(cnt);
    res_valid = (state == S_ACC_OUT);
  end

endmodule
