// tb_subarray_group -- checks one group of M subarrays end to end: command
// broadcast, independent stochastic writes in every subarray, the local bus
// and the local accumulator.
//
// Deterministic checks: a preset '1' column counts M in every row, a preset
// '0' column counts 0, a pulse of code 255 (P_sw = 1) sets all cells, code 0
// none. For random columns (code for P_sw ~ 0.5) the exact relations
// AND(ones, X) = X, NAND(X, X) = M - X and NOT(X) = M - X are checked row by
// row, and the subarrays must hold different bits (their counts are neither
// all 0 nor all M over the 256 rows). The accumulation takes M cycles.
module tb_subarray_group;
  import stoch_imc_pkg::*;

  localparam int unsigned M    = 16;
  localparam int unsigned ROWS = 256;
  localparam int unsigned COLS = 256;
  localparam int unsigned CW   = $clog2(M + 1);

  logic          clk = 1'b0, rst_n = 1'b0;
  sa_cmd_t       cmd;
  logic          rd_en, lacc_clr, lacc_en;
  addr_t         rd_row, rd_col;
  logic [3:0]    lsel;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;

  subarray_group #(.M(M), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(sa_op_e op, gate_e g, int c0, int c1, int oc, logic [7:0] data);
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.gate = g; cmd.row_first = 0; cmd.row_last = 8'(ROWS - 1);
    cmd.in_col[0] = addr_t'(c0); cmd.in_col[1] = addr_t'(c1); cmd.out_col = addr_t'(oc);
    cmd.data = data;
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic acc(int row, int col, output int cnt);
    int cyc;
    @(negedge clk);
    rd_en = 1; rd_row = addr_t'(row); rd_col = addr_t'(col); lacc_clr = 1;
    @(negedge clk);
    rd_en = 0; lacc_clr = 0;
    cyc = 0;
    for (int j = 0; j < M; j++) begin
      lsel = 4'(j); lacc_en = 1; cyc++;
      @(negedge clk);
    end
    lacc_en = 0;
    checks++; if (cyc != M) failures++;
    cnt = int'(count);
  endtask

  int x, y;
  initial begin
    cmd = '0; rd_en = 0; lacc_clr = 0; lacc_en = 0; lsel = 0; rd_row = 0; rd_col = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    step(SA_PRESET, G_BUFF, 0, 0, 0, 8'd1);           // col0 = 1
    step(SA_PRESET, G_BUFF, 0, 0, 1, 8'd0);           // col1 = 0
    step(SA_PRESET, G_BUFF, 0, 0, 2, 8'd0);
    step(SA_SBG,    G_BUFF, 0, 0, 2, 8'd255);         // col2 = all ones
    step(SA_PRESET, G_BUFF, 0, 0, 3, 8'd0);
    step(SA_SBG,    G_BUFF, 0, 0, 3, 8'd0);           // col3 = no pulse -> 0
    step(SA_PRESET, G_BUFF, 0, 0, 4, 8'd0);
    step(SA_SBG,    G_BUFF, 0, 0, 4, 8'd109);         // col4 = random, P ~ 0.5
    step(SA_PRESET, G_BUFF, 0, 0, 5, 8'd1);
    step(SA_LOGIC,  G_AND,  0, 4, 5, 8'd0);           // col5 = 1 AND X = X
    step(SA_PRESET, G_BUFF, 0, 0, 6, 8'd0);
    step(SA_LOGIC,  G_NAND, 4, 4, 6, 8'd0);           // col6 = NAND(X,X) = NOT X
    step(SA_PRESET, G_BUFF, 0, 0, 7, 8'd0);
    step(SA_LOGIC,  G_NOT,  4, 0, 7, 8'd0);           // col7 = NOT X

    for (int r = 0; r < 8; r++) begin
      int rr;
      rr = $urandom_range(0, ROWS - 1);
      acc(rr, 0, x); checks++; if (x != M) failures++;
      acc(rr, 1, x); checks++; if (x != 0) failures++;
      acc(rr, 2, x); checks++; if (x != M) failures++;
      acc(rr, 3, x); checks++; if (x != 0) failures++;
    end
    begin
      int lo, hi, sum;
      lo = 0; hi = 0; sum = 0;
      for (int r = 0; r < ROWS; r++) begin
        acc(r, 4, x);
        sum += x;
        if (x == 0) lo++;
        if (x == int'(M)) hi++;
        acc(r, 5, y); checks++; if (y != x) failures++;
        acc(r, 6, y); checks++; if (y != int'(M) - x) failures++;
        acc(r, 7, y); checks++; if (y != int'(M) - x) failures++;
      end
      // subarrays draw independent bits
      checks++; if (lo + hi > 8) begin failures++; $display("counts stuck: %0d %0d", lo, hi); end
      // mean near M/2 (code 109 gives P_sw ~ 0.5)
      checks++;
      if (sum < int'(ROWS * M) * 4 / 10 || sum > int'(ROWS * M) * 6 / 10) begin
        failures++; $display("mean off: %0d of %0d", sum, ROWS * M);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
