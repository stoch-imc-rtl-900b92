// tb_stoch_imc_memory -- end-to-end test of the top level, a Stoch-IMC
// memory at full size (every parameter at its default: one bank of
// 16 groups x 16 subarrays of 256 x 256 cells).
//
// The testbench acts as the host. It loads the BtoS memory with a
// calibration table (for every 8-bit value v, the pulse code whose switching
// probability is closest to v/256, found by evaluating the thermal switching
// law P_sw = 1 - exp(-tp/tau), tau = tau0 exp(Delta (1 - Vp/Vc0)) over all
// codes), loads a program into the global buffer, starts it and checks the
// binary results.
//
// The program, applied to 16 rows of every subarray in parallel:
//   inputs   A = 0.5, B = 0.75, C = 0.5 by stochastic writes, ONE by preset
//   multiplication          A*B                   (AND)
//   scaled addition         C*A + (1-C)*B          (NOT, AND, AND, OR, each
//                                                  gate presetting the next
//                                                  gate's output)
//   exact identities        NAND(1,1)=0, NOR(0,0)=1, AND(1,B)=B,
//                           MAJ3N(1,0,A)=NOT A, MAJ5N(1,1,1,0,0)=0
//   inter-row copy          BUFF of the product column shifted down a row
// and then reads results by stochastic-to-binary accumulation. Exact
// identities are checked exactly, stochastic values within statistical
// bounds. It also checks the in-memory step count, that every
// accumulation takes N+M = 32 steps, and counts how often each mechanism
// (preset, stochastic write, each gate, shifted copy, overlapped preset,
// local, global and inter-bank accumulation) happened; one that never
// happened counts as a failure.
module tb_stoch_imc_memory;
  import stoch_imc_pkg::*;

  localparam int unsigned N = 16, M = 16;
  localparam int unsigned BITS = N * M;   // bitstream length
  localparam int R = 16;                  // rows used by the program

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        host_we, host_sel, host_start;
  logic [15:0] host_addr;
  inst_t       host_wdata;
  logic        res_valid;
  logic [8:0]  res_data;
  logic [15:0] res_idx;
  logic        busy, done;
  logic [31:0] steps;

  int checks = 0, failures = 0;

  stoch_imc_memory dut (.*);


  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  function automatic real p_sw(int code);
    real vp, tau;
    if (code == 0) return 0.0;
    vp  = 0.25 + code * 0.0005;
    tau = 1.0 * $exp(40.0 * (1.0 - vp / 0.31959));
    return 1.0 - $exp(-4.0 / tau);
  endfunction

  function automatic logic [7:0] calib(int v);
    real target, best_err, err;
    int best;
    if (v == 0) return 8'd0;
    target = real'(v) / 256.0;
    best = 1; best_err = 2.0;
    for (int c = 1; c < 256; c++) begin
      err = p_sw(c) - target;
      if (err < 0.0) err = -err;
      if (err < best_err) begin best_err = err; best = c; end
    end
    return 8'(best);
  endfunction

  inst_t prog [$];
  int    n_step_inst = 0, n_acc = 0;

  function automatic inst_t mk(iop_e op, gate_e g, int r0, int r1, int sh, int oc, int imm,
                               int c0 = 0, int c1 = 0, int c2 = 0, int c3 = 0, int c4 = 0);
    inst_t i;
    i = '0;
    i.op = op; i.gate = g; i.row_first = addr_t'(r0); i.row_last = addr_t'(r1);
    i.row_shift = 9'(sh); i.out_col = addr_t'(oc); i.imm = 8'(imm);
    i.in_col[0] = addr_t'(c0); i.in_col[1] = addr_t'(c1); i.in_col[2] = addr_t'(c2);
    i.in_col[3] = addr_t'(c3); i.in_col[4] = addr_t'(c4);
    return i;
  endfunction

  task automatic p_preset(int col, bit v);
    prog.push_back(mk(I_PRESET, G_BUFF, 0, R - 1, 0, col, int'(v))); n_step_inst++;
  endtask
  task automatic p_sbg(int col, int value);
    prog.push_back(mk(I_PRESET, G_BUFF, 0, R - 1, 0, col, 0)); n_step_inst++;
    prog.push_back(mk(I_SBG, G_BUFF, 0, R - 1, 0, col, value)); n_step_inst++;
  endtask
  task automatic p_logic(gate_e g, int oc, int c0, int c1 = 0, int c2 = 0, int c3 = 0, int c4 = 0,
                         int sh = 0, int r0 = 0, int r1 = R - 1);
    prog.push_back(mk(I_PRESET, G_BUFF, 0, R - 1, 0, oc, int'(gate_preset(g)))); n_step_inst++;
    prog.push_back(mk(I_LOGIC, g, r0, r1, sh, oc, 0, c0, c1, c2, c3, c4)); n_step_inst++;
  endtask
  // logic step without its own preset; it presets column pc to pv for the
  // next gate in the same step (overlapped preset)
  task automatic p_logic_ov(gate_e g, int oc, int c0, int c1, int pc, int pv);
    inst_t i;
    i = mk(I_LOGIC, g, 0, R - 1, 0, oc, pv, c0, c1);
    if (pc >= 0) begin i.pre_en = 1'b1; i.pre_col = addr_t'(pc); end
    prog.push_back(i); n_step_inst++;
  endtask
  task automatic p_acc(int row, int col);
    prog.push_back(mk(I_ACC, G_BUFF, row, row, 0, 0, 0, col)); n_acc++;
  endtask

  // ------------------------------------------------------ mechanism counters
  int cnt_overlap = 0;
  int cnt_preset = 0, cnt_sbg = 0, cnt_shift = 0, cnt_local = 0, cnt_global = 0;
  int cnt_gate [8] = '{default: 0};
  int lrun = 0, grun = 0, acc_len_bad = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.g_bank[0].u_bank.cmd.op == SA_PRESET) cnt_preset++;
    if (dut.g_bank[0].u_bank.cmd.op == SA_SBG)    cnt_sbg++;
    if (dut.g_bank[0].u_bank.cmd.op == SA_LOGIC) begin
      cnt_gate[int'(dut.g_bank[0].u_bank.cmd.gate)]++;
      if (dut.g_bank[0].u_bank.cmd.row_shift != 0) cnt_shift++;
      if (dut.g_bank[0].u_bank.cmd.pre_en) cnt_overlap++;
    end
    if (dut.g_bank[0].u_bank.lacc_en) lrun++;
    if (dut.g_bank[0].u_bank.gacc_en) grun++;
    if (dut.g_bank[0].u_bank.rd_en) begin lrun = 0; grun = 0; end
    if (dut.g_bank[0].u_bank.acc_valid) begin
      cnt_local++; cnt_global++;
      if (lrun != int'(M) || grun != int'(N)) acc_len_bad++;
    end
  end

  int res [$];
  int cnt_bank_sum = 0;
  always @(posedge clk) if (rst_n && res_valid) cnt_bank_sum++;
  always @(posedge clk) if (rst_n && res_valid) begin
    if (int'(res_idx) != res.size()) begin failures++; $display("result index %0d out of order", res_idx); end
    res.push_back(int'(res_data));
  end

  // ------------------------------------------------------------------- test
  localparam int A = 0, B = 1, C = 2, ONE = 3, AB = 4, CN = 5, N1 = 6, N2 = 7, Y = 8,
                 Z = 9, CP = 10, BB = 11, NA = 12, NO = 13, M5 = 14;

  initial begin
    int t_start, t_end, k;
    host_we = 0; host_sel = 0; host_start = 0; host_addr = 0; host_wdata = '0;

    // inputs
    p_sbg(A, 128);
    p_sbg(B, 192);
    p_sbg(C, 128);
    p_preset(ONE, 1'b1);
    p_preset(Z, 1'b0);
    // multiplication
    p_logic(G_AND, AB, A, B);
    // scaled addition, S = C: Y = C*A + (1-C)*B
    // (each gate presets the next gate's output cell: 1 preset + 4 steps)
    p_preset(CN, gate_preset(G_NOT));
    p_logic_ov(G_NOT, CN, C,  0,  N1, int'(gate_preset(G_AND)));
    p_logic_ov(G_AND, N1, A,  C,  N2, int'(gate_preset(G_AND)));
    p_logic_ov(G_AND, N2, B,  CN, Y,  int'(gate_preset(G_OR)));
    p_logic_ov(G_OR,  Y,  N1, N2, -1, 0);
    // identities
    p_logic(G_NAND, 15, ONE, ONE);            // col 15 = 0
    p_logic(G_NOR,  NO, Z, Z);                // = 1
    p_logic(G_AND,  BB, ONE, B);              // = B
    p_logic(G_MAJ3N, NA, ONE, Z, A);          // = NOT A
    p_logic(G_MAJ5N, M5, ONE, ONE, ONE, Z, Z);// = 0
    // inter-row copy: row r of AB -> row r+1 of CP
    p_logic(G_BUFF, CP, AB, 0, 0, 0, 0, 1, 0, R - 2);

    p_acc(0, ONE);  p_acc(0, 15);  p_acc(0, NO);  p_acc(0, M5);      // results 0..3
    for (int r = 0; r < R - 1; r++) begin p_acc(r, AB); p_acc(r + 1, CP); end // 4..33
    for (int r = 0; r < 4; r++) begin p_acc(r, B); p_acc(r, BB); end          // 34..41
    for (int r = 0; r < 4; r++) begin p_acc(r, A); p_acc(r, NA); end          // 42..49
    for (int r = 0; r < R; r++) p_acc(r, Y);                                  // 50..65
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0, 0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    // load BtoS calibration and program
    for (int v = 0; v < 256; v++) begin
      @(negedge clk); host_we = 1; host_sel = 0; host_addr = 16'(v); host_wdata = '0;
      host_wdata.imm = calib(v);
    end
    foreach (prog[i]) begin
      @(negedge clk); host_we = 1; host_sel = 1; host_addr = 16'(i); host_wdata = prog[i];
    end
    @(negedge clk); host_we = 0;
    @(negedge clk);
    host_start = 1; t_start = int'($time / 10);
    @(negedge clk); host_start = 0;
    while (!done) @(negedge clk);
    t_end = int'($time / 10);
    repeat (3) @(negedge clk);

    checks++;
    if (res.size() != n_acc) begin
      failures++; $display("got %0d results, want %0d", res.size(), n_acc);
    end else begin
      // exact
      checks++; if (res[0] != int'(BITS)) begin failures++; $display("ONE -> %0d", res[0]); end
      checks++; if (res[1] != 0)          begin failures++; $display("NAND(1,1) -> %0d", res[1]); end
      checks++; if (res[2] != int'(BITS)) begin failures++; $display("NOR(0,0) -> %0d", res[2]); end
      checks++; if (res[3] != 0)          begin failures++; $display("MAJ5N -> %0d", res[3]); end
      k = 4;
      begin
        int sum_ab;
        sum_ab = 0;
        for (int r = 0; r < R - 1; r++) begin
          checks++;
          if (res[k] != res[k + 1]) begin failures++; $display("copy row %0d: %0d vs %0d", r, res[k], res[k + 1]); end
          sum_ab += res[k];
          k += 2;
        end
        // A*B = 0.375 -> 96 of 256 per row; mean of 15 rows (sd ~2)
        checks++;
        if (sum_ab < 15 * 86 || sum_ab > 15 * 106) begin failures++; $display("A*B mean %0d/15", sum_ab); end
        $display("multiplication 0.5*0.75: mean count %0.1f of 256 (exact 96)", real'(sum_ab) / 15.0);
      end
      for (int r = 0; r < 4; r++) begin
        checks++; if (res[k] != res[k + 1]) begin failures++; $display("AND(1,B) row %0d", r); end
        checks++; if (res[k] < 192 - 40 || res[k] > 192 + 40) begin failures++; $display("B row %0d = %0d", r, res[k]); end
        k += 2;
      end
      for (int r = 0; r < 4; r++) begin
        checks++; if (res[k] + res[k + 1] != int'(BITS)) begin failures++; $display("MAJ3N row %0d", r); end
        k += 2;
      end
      begin
        int sum_y;
        sum_y = 0;
        for (int r = 0; r < R; r++) begin
          checks++; if (res[k] < 160 - 40 || res[k] > 160 + 40) begin failures++; $display("Y row %0d = %0d", r, res[k]); end
          sum_y += res[k];
          k++;
        end
        checks++; if (sum_y < R * 150 || sum_y > R * 170) begin failures++; $display("Y mean %0d/16", sum_y); end
        $display("scaled addition 0.5*0.5+0.5*0.75: mean count %0.1f of 256 (exact 160)", real'(sum_y) / R);
      end
    end

    // step count: one per preset / write / logic, N+M per accumulation
    checks++;
    if (steps != 32'(n_step_inst + n_acc * int'(N + M))) begin
      failures++; $display("steps %0d, want %0d", steps, n_step_inst + n_acc * int'(N + M));
    end
    checks++; if (acc_len_bad != 0) begin failures++; $display("%0d accumulations not N+M long", acc_len_bad); end
    $display("program: %0d instructions, %0d in-memory steps, %0d clock cycles", prog.size(), steps, t_end - t_start);

    // every mechanism happened
    $display("mechanisms: preset %0d, stochastic write %0d, shifted copy %0d, overlapped preset %0d, local acc %0d, global acc %0d, inter-bank sum %0d",
             cnt_preset, cnt_sbg, cnt_shift, cnt_overlap, cnt_local, cnt_global, cnt_bank_sum);
    checks++; if (cnt_preset == 0) failures++;
    checks++; if (cnt_sbg == 0)    failures++;
    checks++; if (cnt_shift == 0)  failures++;
    checks++; if (cnt_overlap != 3) begin failures++; $display("%0d overlapped presets, want 3", cnt_overlap); end
    checks++; if (cnt_local == 0)  failures++;
    checks++; if (cnt_global == 0) failures++;
    checks++; if (cnt_bank_sum == 0) failures++;
    for (int g = 0; g < 8; g++) begin
      checks++;
      if (cnt_gate[g] == 0) begin failures++; $display("gate %0d never used", g); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
