// tb_divider -- stochastic scaled division and heart-disaster prediction on a
// full-size bank (every parameter at its default).
//
// The scaled divider is a JK flip-flop built from gates:
//   Y = NAND(NAND(NOT Q, A), NAND(Q, NAND(Q, B)))  =  A & ~Q  |  Q & ~B,
// with Q the previous output (fed back through a buffer, initially 0). Its
// output is '1' with probability q_(t+1) = a (1 - q_t) + (1 - b) q_t, which
// settles at a / (a + b). Each output bit depends on the previous one, so
// the bits of one stream cannot be computed side by side. Instead every
// subarray runs its own chain, one row per time step: row t holds fresh
// input bits A, B and the state Q_t; the feedback buffer is a BUFF of Y into
// column Q one time step further down (row shift). After T steps the cell
// (row of step T-1, column Y) of the 256 subarrays holds 256 independent
// samples of the chain's state, and accumulation returns their count.
//
// 1. Division: C = 8 divisions in parallel, rows interleaved (row = t*C + c)
//    so that one step of all chains is one contiguous row range; T = 24
//    steps of six logic operations. The count is checked after 4 and after
//    24 steps against the exact recurrence (transient and settled value).
// 2. Heart-disaster prediction (Bayesian belief network):
//      h    = E ? (D ? P(E|D) : P(E|~D)) : (D ? P(~E|D) : P(~E|~D))
//      J    = P(BP) P(CP) h,   K = P(~BP) P(~CP) (1 - h)
//      P(HD)= J / (J + K)  by the same JK divider.
//    The network (three multiplexers and four ANDs) runs on all 32 rows in
//    parallel, then the divider chain runs over them. Three sets of input
//    probabilities, one program each.
// Every result is checked within 5 binomial standard deviations plus 4% of
// full scale. The gate circuit of the divider and the network follow the
// source; the row-per-time-step mapping of the feedback is this testbench's
// own.
module tb_divider;
  import stoch_imc_pkg::*;

  localparam int C = 8, T = 24;         // division: chains, time steps
  localparam int TH = 32;               // heart-disaster: time steps

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

  stoch_imc_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // ------------------------------------------------------------ program
  inst_t prog [$];

  function automatic inst_t mk(iop_e op, gate_e g, int r0, int r1, int sh, int oc, int imm,
                               int c0 = 0, int c1 = 0);
    inst_t i;
    i = '0;
    i.op = op; i.gate = g; i.row_first = addr_t'(r0); i.row_last = addr_t'(r1);
    i.row_shift = 9'(sh); i.out_col = addr_t'(oc); i.imm = 8'(imm);
    i.in_col[0] = addr_t'(c0); i.in_col[1] = addr_t'(c1);
    return i;
  endfunction

  task automatic preset(int col, int v, int r0, int r1);
    prog.push_back(mk(I_PRESET, G_BUFF, r0, r1, 0, col, v));
  endtask
  task automatic sbg(int col, int value, int r0, int r1);
    prog.push_back(mk(I_SBG, G_BUFF, r0, r1, 0, col, value));
  endtask
  task automatic write(int col, int value, int r0, int r1);
    preset(col, 0, r0, r1);
    sbg(col, value, r0, r1);
  endtask
  // logic step whose output cells were preset beforehand
  task automatic op(gate_e g, int oc, int c0, int c1, int r0, int r1, int sh = 0);
    prog.push_back(mk(I_LOGIC, g, r0, r1, sh, oc, 0, c0, c1));
  endtask
  // preset + logic step
  task automatic gate(gate_e g, int oc, int c0, int c1, int r0, int r1);
    preset(oc, int'(gate_preset(g)), r0, r1);
    op(g, oc, c0, c1, r0, r1);
  endtask
  task automatic acc(int row, int col);
    prog.push_back(mk(I_ACC, G_BUFF, row, row, 0, 0, 0, col));
  endtask

  // Y = S ? A : B
  task automatic mux(int y, int a, int b, int s, int r0, int r1);
    gate(G_NOT, 60, s, 0, r0, r1);
    gate(G_AND, 61, a, s, r0, r1);
    gate(G_AND, 62, b, 60, r0, r1);
    gate(G_OR,  y, 61, 62, r0, r1);
  endtask

  // Divider chain over steps 0..nt-1; step t uses rows t*w .. t*w+w-1.
  // Inputs in columns a, b; all chain columns must be preset: Q to 0 in
  // step 0 and to 1 (BUFF) below, the NOT/NAND outputs to 0.
  localparam int Q = 2, QN = 3, X1 = 4, X2 = 5, X3 = 6, Y = 7;
  task automatic divider(int a, int b, int nt, int w);
    preset(Q, 0, 0, w - 1);
    preset(Q, 1, w, nt * w - 1);
    preset(QN, 0, 0, nt * w - 1);
    preset(X1, 0, 0, nt * w - 1);
    preset(X2, 0, 0, nt * w - 1);
    preset(X3, 0, 0, nt * w - 1);
    preset(Y,  0, 0, nt * w - 1);
    for (int t = 0; t < nt; t++) begin
      int r0, r1;
      r0 = t * w; r1 = t * w + w - 1;
      op(G_NOT,  QN, Q,  0,  r0, r1);
      op(G_NAND, X1, QN, a,  r0, r1);
      op(G_NAND, X2, Q,  b,  r0, r1);
      op(G_NAND, X3, Q,  X2, r0, r1);
      op(G_NAND, Y,  X1, X3, r0, r1);
      if (t < nt - 1) op(G_BUFF, Q, Y, 0, r0, r1, w);   // feedback buffer
    end
  endtask

  int res [$];
  always @(posedge clk) if (rst_n && res_valid) res.push_back(int'(res_data));

  task automatic run_program();
    res.delete();
    foreach (prog[i]) begin
      @(negedge clk); host_we = 1; host_sel = 1; host_addr = 16'(i); host_wdata = prog[i];
    end
    @(negedge clk); host_we = 0;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  function automatic bit close(int got, real p);
    real tol;
    tol = 5.0 * $sqrt(256.0 * p * (1.0 - p)) + 0.04 * 256.0 + 1.0;
    return (real'(got) >= 256.0 * p - tol) && (real'(got) <= 256.0 * p + tol);
  endfunction

  // state probability of the JK chain after n steps from Q = 0
  function automatic real chain(real j, real k, int n);
    real q;
    q = 0.0;
    for (int t = 0; t < n; t++) q = j * (1.0 - q) + (1.0 - k) * q;
    return q;
  endfunction

  int av [C], bv [C];
  int hp [11];

  initial begin
    host_we = 0; host_sel = 0; host_start = 0; host_addr = 0; host_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 256; v++) begin
      @(negedge clk); host_we = 1; host_sel = 0; host_addr = 16'(v); host_wdata = '0;
      host_wdata.imm = calib(v);
    end

    // ------------------------------------------------------- division
    prog.delete();
    preset(0, 0, 0, C * T - 1);
    preset(1, 0, 0, C * T - 1);
    for (int c = 0; c < C; c++) begin
      av[c] = $urandom_range(40, 200);
      bv[c] = $urandom_range(40, 200);
    end
    for (int t = 0; t < T; t++)
      for (int c = 0; c < C; c++) begin
        sbg(0, av[c], t * C + c, t * C + c);
        sbg(1, bv[c], t * C + c, t * C + c);
      end
    divider(0, 1, T, C);
    for (int c = 0; c < C; c++) acc(3 * C + c, Y);         // after 4 steps
    for (int c = 0; c < C; c++) acc((T - 1) * C + c, Y);   // after T steps
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0, 0));
    $display("division program: %0d instructions", prog.size());
    run_program();
    checks++;
    if (res.size() != 2 * C) begin failures++; $display("division: %0d results", res.size()); end
    else for (int c = 0; c < C; c++) begin
      real a, b, q4, qt;
      a = real'(av[c]) / 256.0; b = real'(bv[c]) / 256.0;
      q4 = chain(a, b, 4); qt = chain(a, b, T);
      checks++;
      if (!close(res[c], q4)) begin failures++; $display("div %0d step 4: got %0d want %0.1f", c, res[c], 256.0 * q4); end
      checks++;
      if (!close(res[C + c], qt)) begin failures++; $display("div %0d: got %0d want %0.1f", c, res[C + c], 256.0 * qt); end
      if (c % 3 == 0)
        $display("%0.3f / (%0.3f + %0.3f) = %0.3f, in memory %0.3f", a, a, b, a / (a + b), real'(res[C + c]) / 256.0);
    end

    // ----------------------------------------- heart-disaster prediction
    // hp: 0 P(E|D) 1 P(E|~D) 2 P(~E|D) 3 P(~E|~D) 4 P(D) 5 P(E)
    //     6 P(BP) 7 P(CP) 8 P(~BP) 9 P(~CP)   (values of 256)
    for (int run = 0; run < 3; run++) begin
      real h, j, k, ph, q;
      for (int i = 0; i < 6; i++) hp[i] = $urandom_range(30, 230);
      hp[6] = $urandom_range(80, 230); hp[7] = $urandom_range(80, 230);
      hp[8] = 256 - hp[6];             hp[9] = 256 - hp[7];
      prog.delete();
      for (int i = 0; i < 10; i++) write(10 + i, hp[i], 0, TH - 1);
      write(20, hp[4], 0, TH - 1);       // second, independent copy of P(D)
      mux(21, 10, 11, 14, 0, TH - 1);    // D ? P(E|D)  : P(E|~D)
      mux(22, 12, 13, 20, 0, TH - 1);    // D ? P(~E|D) : P(~E|~D)
      mux(23, 21, 22, 15, 0, TH - 1);    // h = E ? .. : ..
      gate(G_AND, 24, 16, 17, 0, TH - 1);  // BP CP
      gate(G_AND, 25, 24, 23, 0, TH - 1);  // J
      gate(G_NOT, 26, 23, 0, 0, TH - 1);   // 1 - h
      gate(G_AND, 27, 18, 19, 0, TH - 1);  // ~BP ~CP
      gate(G_AND, 28, 26, 27, 0, TH - 1);  // K
      divider(25, 28, TH, 1);
      acc(TH - 1, Y);
      acc(0, 23);
      prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0, 0));
      run_program();
      h = (real'(hp[5]) / 256.0) * ((real'(hp[4]) / 256.0) * (real'(hp[0]) / 256.0) +
                                   (1.0 - real'(hp[4]) / 256.0) * (real'(hp[1]) / 256.0)) +
          (1.0 - real'(hp[5]) / 256.0) * ((real'(hp[4]) / 256.0) * (real'(hp[2]) / 256.0) +
                                         (1.0 - real'(hp[4]) / 256.0) * (real'(hp[3]) / 256.0));
      j = (real'(hp[6]) / 256.0) * (real'(hp[7]) / 256.0) * h;
      k = (real'(hp[8]) / 256.0) * (real'(hp[9]) / 256.0) * (1.0 - h);
      ph = j / (j + k);
      q = chain(j, k, TH);
      checks++;
      if (res.size() != 2) begin failures++; $display("HDP: %0d results", res.size()); end
      else begin
        checks++;
        if (!close(res[1], h)) begin failures++; $display("HDP %0d P(HD|E,D): got %0d want %0.1f", run, res[1], 256.0 * h); end
        checks++;
        if (!close(res[0], q)) begin failures++; $display("HDP %0d: got %0d want %0.1f", run, res[0], 256.0 * q); end
        $display("heart disaster %0d: P(HD|E,D) %0.3f (in memory %0.3f), P(HD) %0.3f, after %0d steps %0.3f, in memory %0.3f",
                 run, h, real'(res[1]) / 256.0, ph, TH, q, real'(res[0]) / 256.0);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
