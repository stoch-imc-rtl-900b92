// subarray -- functional model of one 2T-1MTJ computational subarray.
//
// The subarray is a ROWS x COLS array of STT-MRAM cells ('0' = parallel, low
// resistance; '1' = anti-parallel, high resistance) with a row decoder, the
// SL/BL drivers and a buffer register (the three peripheral blocks of the
// paper's subarray drawing). It executes one broadcast command per clock:
//
//   SA_PRESET  memory-mode write of data[0] into column out_col, rows
//              row_first..row_last.
//   SA_SBG     stochastic bit generation: every cell of out_col in the row
//              range whose MTJ switches under the applied pulse
//              (sw_outcome[r] = 1, supplied by the device model) becomes '1'.
//              Cells only switch from '0' to '1', so the column must have been
//              preset to '0' first, as the paper requires.
//   SA_LOGIC   logic mode: gate(in_col[0..k-1]) is evaluated in every row r of
//              the range in the same step and written to row r+row_shift of
//              out_col. As in the device, the output cell can only switch
//              away from its preset value: gates preset to '0' can only set
//              it to '1', gates preset to '1' can only clear it. A logic step
//              on an output cell that was not preset therefore gives the
//              wrong answer, exactly like the real array.
//              With pre_en set, column pre_col (rows row_first..row_last) is
//              preset to data[0] in the same step: the output cell of the
//              next gate is prepared while this gate runs. pre_col must
//              differ from out_col and from the gate's input columns.
//
// The row-parallel evaluation (same gate, same input columns, all rows at
// once) and the inter-row copy by BUFF follow the paper's sequence-flow
// tables; a contiguous row range and a single signed row shift are this
// design's way of encoding them. Cells are stored column-major so that a
// row-parallel step is one vector operation.
//
// Read path: when rd_en is high, the cell (rd_row, rd_col) is loaded into the
// buffer register rd_bit, visible one cycle later; it drives the local bus
// during stochastic-to-binary accumulation.
//
// Timing: every command takes effect at the rising clock edge at which it is
// presented; results are readable from the next cycle.
module subarray
  import stoch_imc_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sa_cmd_t         cmd,
  input  logic [ROWS-1:0] sw_outcome,
  input  logic            rd_en,
  input  addr_t           rd_row,
  input  addr_t           rd_col,
  output logic            rd_bit
);

  logic [ROWS-1:0] cells [COLS];

  // Row decoder: the rows addressed by the command.
  logic [ROWS-1:0] row_mask;
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++)
      row_mask[r] = (r >= 32'(cmd.row_first)) && (r <= 32'(cmd.row_last));
  end

  // Input columns, read in every row at once.
  logic [ROWS-1:0] in_v [MAX_IN];
  always_comb begin
    for (int i = 0; i < MAX_IN; i++)
      in_v[i] = (32'(cmd.in_col[i]) < COLS) ? cells[cmd.in_col[i]] : '0;
  end

  // Gate function, evaluated bit-parallel over the rows.
  logic [ROWS-1:0] f_v;
  always_comb begin
    logic [ROWS-1:0] a, b, c, d, e;
    a = in_v[0]; b = in_v[1]; c = in_v[2]; d = in_v[3]; e = in_v[4];
    unique case (cmd.gate)
      G_BUFF:  f_v = a;
      G_NOT:   f_v = ~a;
      G_AND:   f_v = a & b;
      G_NAND:  f_v = ~(a & b);
      G_OR:    f_v = a | b;
      G_NOR:   f_v = ~(a | b);
      G_MAJ3N: f_v = ~((a & b) | (a & c) | (b & c));
      G_MAJ5N: f_v = ~((a & b & c) | (a & b & d) | (a & b & e) | (a & c & d) | (a & c & e) |
                       (a & d & e) | (b & c & d) | (b & c & e) | (b & d & e) | (c & d & e));
      default: f_v = a;
    endcase
  end

  // Move results to the destination rows (inter-row copy).
  logic [ROWS-1:0] f_s, m_s;
  always_comb begin
    if (cmd.row_shift >= 0) begin
      f_s = f_v << unsigned'(cmd.row_shift);
      m_s = row_mask << unsigned'(cmd.row_shift);
    end else begin
      f_s = f_v >> unsigned'(-cmd.row_shift);
      m_s = row_mask >> unsigned'(-cmd.row_shift);
    end
  end

  always_ff @(posedge clk) begin
    if (32'(cmd.out_col) < COLS) begin
      unique case (cmd.op)
        SA_PRESET:
          cells[cmd.out_col] <= cmd.data[0] ? (cells[cmd.out_col] | row_mask)
                                            : (cells[cmd.out_col] & ~row_mask);
        SA_SBG:
          cells[cmd.out_col] <= cells[cmd.out_col] | (row_mask & sw_outcome);
        SA_LOGIC:
          if (gate_preset(cmd.gate))   // preset '1': the cell can only be cleared
            cells[cmd.out_col] <= cells[cmd.out_col] & ~(m_s & ~f_s);
          else                         // preset '0': the cell can only be set
            cells[cmd.out_col] <= cells[cmd.out_col] | (m_s & f_s);
        default: ;
      endcase
    end
    if (cmd.op == SA_LOGIC && cmd.pre_en && 32'(cmd.pre_col) < COLS)
      cells[cmd.pre_col] <= cmd.data[0] ? (cells[cmd.pre_col] | row_mask)
                                        : (cells[cmd.pre_col] & ~row_mask);
  end

  // The overlapped preset must not touch the gate's own cells.
  a_pre_col_free: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd.op == SA_LOGIC && cmd.pre_en) |-> (cmd.pre_col != cmd.out_col &&
      cmd.pre_col != cmd.in_col[0] &&
      (gate_arity(cmd.gate) < 2 || cmd.pre_col != cmd.in_col[1]) &&
      (gate_arity(cmd.gate) < 3 || cmd.pre_col != cmd.in_col[2]) &&
      (gate_arity(cmd.gate) < 4 || (cmd.pre_col != cmd.in_col[3] && cmd.pre_col != cmd.in_col[4]))));

  // Buffer register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      rd_bit <= 1'b0;
    else if (rd_en)
      rd_bit <= (32'(rd_col) < COLS && 32'(rd_row) < ROWS) ? cells[rd_col][rd_row] : 1'b0;
  end

endmodule
