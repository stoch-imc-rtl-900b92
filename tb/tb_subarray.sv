// tb_subarray -- self-checking testbench of the 2T-1MTJ subarray model.
//
// Fills input columns with random bits through stochastic writes (the
// testbench drives the switching outcome directly), then runs a few hundred
// random preset + logic steps with random gates, row ranges and row shifts.
// A scalar reference model, written row by row, predicts every output cell;
// the whole output column is read back through the buffer register and
// compared. Every other logic step also presets a further column over the
// same rows (the preset overlapped with a logic step), which is checked too.
// It also checks that a logic step on an output cell that was not
// preset to the gate's preset value leaves the cell unchanged, and that a
// stochastic write only sets cells.
module tb_subarray;
  import stoch_imc_pkg::*;

  localparam int unsigned ROWS = 256;
  localparam int unsigned COLS = 256;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  sa_cmd_t         cmd;
  logic [ROWS-1:0] sw;
  logic            rd_en;
  addr_t           rd_row, rd_col;
  logic            rd_bit;

  int checks = 0, failures = 0;

  subarray #(.ROWS(ROWS), .COLS(COLS)) dut (.*, .sw_outcome(sw));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic ref_c [COLS][ROWS];

  function automatic logic ref_gate(gate_e g, logic [4:0] x);
    int ones;
    ones = 0;
    for (int k = 0; k < 5; k++) ones += int'(x[k]);
    case (g)
      G_BUFF:  return x[0];
      G_NOT:   return !x[0];
      G_AND:   return x[0] && x[1];
      G_NAND:  return !(x[0] && x[1]);
      G_OR:    return x[0] || x[1];
      G_NOR:   return !(x[0] || x[1]);
      G_MAJ3N: return !((int'(x[0]) + int'(x[1]) + int'(x[2])) >= 2);
      default: return !(ones >= 3);
    endcase
  endfunction

  task automatic step(sa_cmd_t c);
    @(negedge clk);
    cmd = c;
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic preset(int col, int r0, int r1, logic v);
    sa_cmd_t c;
    c = '0;
    c.op = SA_PRESET; c.out_col = addr_t'(col);
    c.row_first = addr_t'(r0); c.row_last = addr_t'(r1); c.data = {7'd0, v};
    step(c);
    for (int r = r0; r <= r1; r++) ref_c[col][r] = v;
  endtask

  task automatic sbg(int col, int r0, int r1, logic [ROWS-1:0] outcome);
    sa_cmd_t c;
    c = '0;
    c.op = SA_SBG; c.out_col = addr_t'(col);
    c.row_first = addr_t'(r0); c.row_last = addr_t'(r1); c.data = 8'd128;
    sw = outcome;
    step(c);
    for (int r = r0; r <= r1; r++) if (outcome[r]) ref_c[col][r] = 1'b1;
  endtask

  task automatic check_col(int col);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      rd_en = 1'b1; rd_row = addr_t'(r); rd_col = addr_t'(col);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_bit !== ref_c[col][r]) begin
        failures++;
        if (failures < 10) $display("mismatch col %0d row %0d: got %b want %b", col, r, rd_bit, ref_c[col][r]);
      end
    end
  endtask

  initial begin
    cmd = '0; sw = '0; rd_en = 1'b0; rd_row = '0; rd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Random data in columns 0..15 (preset to 0, then stochastic write).
    for (int col = 0; col < 16; col++) begin
      logic [ROWS-1:0] o;
      for (int w = 0; w < ROWS / 32; w++) o[w*32 +: 32] = $urandom;
      preset(col, 0, ROWS - 1, 1'b0);
      sbg(col, 0, ROWS - 1, o);
    end
    check_col(3);

    // A stochastic write into a column holding ones keeps the ones and only
    // touches the addressed rows.
    preset(40, 0, ROWS - 1, 1'b0);
    preset(40, 0, 9, 1'b1);
    begin
      logic [ROWS-1:0] o;
      for (int w = 0; w < ROWS / 32; w++) o[w*32 +: 32] = $urandom;
      sbg(40, 5, 100, o);
    end
    check_col(40);

    // Columns that receive overlapped presets start cleared.
    for (int col = 32; col < 40; col++) preset(col, 0, ROWS - 1, 1'b0);

    // Random logic steps.
    for (int t = 0; t < 120; t++) begin
      gate_e g;
      int r0, r1, sh, oc, pc;
      int ic [5];
      sa_cmd_t c;
      g  = gate_e'($urandom_range(0, 7));
      r0 = $urandom_range(0, ROWS - 1);
      r1 = $urandom_range(r0, ROWS - 1);
      sh = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 6) - 3 : 0;
      oc = 16 + $urandom_range(0, 15);
      for (int k = 0; k < 5; k++) ic[k] = $urandom_range(0, 15);
      preset(oc, 0, ROWS - 1, gate_preset(g));
      c = '0;
      c.op = SA_LOGIC; c.gate = g; c.row_first = addr_t'(r0); c.row_last = addr_t'(r1);
      c.row_shift = 9'(sh); c.out_col = addr_t'(oc);
      for (int k = 0; k < 5; k++) c.in_col[k] = addr_t'(ic[k]);
      // every other step also presets a column of 32..39 (overlapped preset)
      pc = -1;
      if (t % 2 == 1) begin
        pc = 32 + $urandom_range(0, 7);
        c.pre_en = 1'b1; c.pre_col = addr_t'(pc); c.data = {7'd0, 1'($urandom)};
      end
      step(c);
      if (pc >= 0) begin
        for (int r = r0; r <= r1; r++) ref_c[pc][r] = c.data[0];
        if (t % 8 == 1) check_col(pc);
      end
      for (int r = r0; r <= r1; r++) begin
        logic [4:0] x;
        for (int k = 0; k < 5; k++) x[k] = ref_c[ic[k]][r];
        if (r + sh >= 0 && r + sh < ROWS) ref_c[oc][r + sh] = ref_gate(g, x);
      end
      if (t % 4 == 0) check_col(oc);
      else begin
        // spot check 16 rows of the range
        for (int s = 0; s < 16; s++) begin
          int r;
          r = $urandom_range(0, ROWS - 1);
          @(negedge clk);
          rd_en = 1'b1; rd_row = addr_t'(r); rd_col = addr_t'(oc);
          @(negedge clk);
          rd_en = 1'b0;
          checks++;
          if (rd_bit !== ref_c[oc][r]) begin
            failures++;
            if (failures < 10) $display("t=%0d gate %s col %0d row %0d: got %b want %b", t, g.name(), oc, r, rd_bit, ref_c[oc][r]);
          end
        end
      end
    end

    // No preset: NAND into a column of ones cannot clear it, AND into a
    // column of zeros cannot set it.
    begin
      sa_cmd_t c;
      preset(50, 0, ROWS - 1, 1'b1);
      c = '0; c.op = SA_LOGIC; c.gate = G_NAND; c.row_first = 0; c.row_last = 8'(ROWS - 1);
      c.in_col[0] = 0; c.in_col[1] = 1; c.out_col = 50;
      step(c);
      check_col(50);
      preset(51, 0, ROWS - 1, 1'b0);
      c.gate = G_AND; c.out_col = 51;
      step(c);
      check_col(51);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
