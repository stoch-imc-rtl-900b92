// stoch_imc_pkg -- types and constants shared by the Stoch-IMC bank.
//
// A Stoch-IMC bank computes with unipolar stochastic bitstreams stored in
// 2T-1MTJ (STT-MRAM) subarrays. Every in-memory step is one of three kinds:
//   * preset           : a column (over a row range) is written to a constant,
//   * stochastic write : preset cells are hit by a write pulse and switch to '1'
//                        with a probability set by the pulse (input
//                        initialisation, "stochastic bit generation"),
//   * logic            : one IMC gate is evaluated in every row of a row range
//                        at once; the output cell, preset beforehand, either
//                        switches or keeps its preset value.
// The gate set (BUFF, NOT, AND, NAND, OR, NOR, inverted MAJ3 and MAJ5) and
// the preset values of NAND ('0') and AND ('1') follow the paper; the preset
// values of the other gates (inverting gates '0', non-inverting gates '1')
// are this design's choice, consistent with those two. A logic step may
// also preset one more column of the same rows (pre_en/pre_col), so that the
// preset of the next gate's output cell overlaps the current gate, as the
// paper assumes when it counts time steps. The encodings of the
// subarray command (sa_cmd_t) and of the controller instruction (inst_t) are
// this design's own.
package stoch_imc_pkg;

  localparam int unsigned ADDR_W = 8;  // row / column address (256 x 256 subarray)
  localparam int unsigned VAL_W  = 8;  // binary resolution: 8 bit <-> 256-bit bitstream
  localparam int unsigned MAX_IN = 5;  // widest gate: inverted MAJ5

  typedef enum logic [2:0] {
    G_BUFF  = 3'd0,
    G_NOT   = 3'd1,
    G_AND   = 3'd2,
    G_NAND  = 3'd3,
    G_OR    = 3'd4,
    G_NOR   = 3'd5,
    G_MAJ3N = 3'd6,   // NOT(MAJ3(a,b,c))
    G_MAJ5N = 3'd7    // NOT(MAJ5(a,b,c,d,e))
  } gate_e;

  // Operation applied to the subarrays in one step.
  typedef enum logic [1:0] {
    SA_NOP    = 2'd0,
    SA_PRESET = 2'd1,
    SA_SBG    = 2'd2,   // stochastic bit generation (probabilistic write)
    SA_LOGIC  = 2'd3
  } sa_op_e;

  typedef logic [ADDR_W-1:0] addr_t;

  typedef struct packed {
    sa_op_e                  op;
    gate_e                   gate;
    addr_t                   row_first;  // first row of the parallel row range
    addr_t                   row_last;   // last row (inclusive)
    logic signed [ADDR_W:0]  row_shift;  // LOGIC: result lands in row r+row_shift
    addr_t [MAX_IN-1:0]      in_col;     // LOGIC: input columns, in_col[0] first
    addr_t                   out_col;    // target column of every operation
    logic                    pre_en;     // LOGIC: also preset pre_col in the same step
    addr_t                   pre_col;    // LOGIC: column preset alongside the gate
    logic [VAL_W-1:0]        data;       // PRESET, LOGIC: bit 0 = preset value; SBG: pulse code
  } sa_cmd_t;

  // Controller instructions held in the global buffer.
  typedef enum logic [2:0] {
    I_NOP    = 3'd0,
    I_PRESET = 3'd1,  // preset out_col rows [row_first,row_last] to imm[0]
    I_SBG    = 3'd2,  // write value imm (probability imm/256) into out_col
    I_LOGIC  = 3'd3,  // gate(in_col) -> out_col in every row of the range
    I_ACC    = 3'd4,  // count the ones of (row_first, in_col[0]) over all subarrays
    I_HALT   = 3'd5
  } iop_e;

  typedef struct packed {
    iop_e                    op;
    gate_e                   gate;
    addr_t                   row_first;
    addr_t                   row_last;
    logic signed [ADDR_W:0]  row_shift;
    addr_t [MAX_IN-1:0]      in_col;
    addr_t                   out_col;
    logic                    pre_en;     // I_LOGIC: preset pre_col to imm[0] in the same step
    addr_t                   pre_col;
    logic [VAL_W-1:0]        imm;
  } inst_t;


  // Value the output cell must hold before a logic step of gate g.
  function automatic logic gate_preset(gate_e g);
    unique case (g)
      G_BUFF, G_AND, G_OR: return 1'b1;
      default:             return 1'b0;
    endcase
  endfunction

  // Number of input cells a gate reads.
  function automatic int unsigned gate_arity(gate_e g);
    unique case (g)
      G_BUFF, G_NOT:   return 1;
      G_MAJ3N:         return 3;
      G_MAJ5N:         return 5;
      default:         return 2;
    endcase
  endfunction

endpackage
