// tb_kde -- kernel density estimation for one pixel on a full-size bank
// (every parameter at its default), including the stochastic exponential.
//
// The estimate over a history of H = 32 frames is
//   PDF = (1/H) * sum_i exp(-4 u_i),   u_i = (X_t + 1 - X_(t-i)) / 2,
// built from stochastic gates only:
//   * u_i        2:1 multiplexer with select 0.5 of X_t and NOT X_(t-i)
//                (NOT, NOT, AND, AND, OR: five row-parallel steps);
//   * exp(-0.8u) fifth-order Maclaurin chain of NAND gates with constants
//                c/5, c/4, c/3, c/2, c (c = 0.8): the first stage is
//                NAND(c/5, u), each later stage NAND(AND(constant, u), previous
//                stage), in ten row-parallel steps. Every stage takes its own,
//                independently generated copy of u, which is what the delay
//                elements of the exponential circuit provide;
//   * exp(-4u)   product of five independent evaluations of exp(-0.8u);
//   * the sum    a five-level tree of 2:1 multiplexers with fresh select
//                bitstreams of 0.5.
// Row layout: frame i uses rows 5i..5i+4 (one row per independent copy of
// exp(-0.8u)), 160 rows in all, so every step runs on all frames and copies
// at once. The five-fold product and the tree combine rows with inter-row
// copies (BUFF with a row shift) followed by an AND or a multiplexer in
// every row; only rows 5i (product) and finally row 0 (PDF) are used.
// Gate chains preset the next gate's output during the current gate.
//
// Checks, each within 5 binomial standard deviations plus 4% of full scale:
// exp(-0.8u) of every frame (exponential alone), exp(-4u) of every frame,
// the final PDF; also the exact in-memory step count of the program.
// The row mapping and the Maclaurin constant quantisation are this
// testbench's own; the circuit structure and c = 4/5 follow the source.
module tb_kde;
  import stoch_imc_pkg::*;

  localparam int H    = 32;             // history frames
  localparam int NR   = 5 * H;          // rows used

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
  int    n_steps = 0, n_acc = 0;

  function automatic inst_t mk(iop_e op, gate_e g, int r0, int r1, int sh, int oc, int imm,
                               int c0 = 0, int c1 = 0);
    inst_t i;
    i = '0;
    i.op = op; i.gate = g; i.row_first = addr_t'(r0); i.row_last = addr_t'(r1);
    i.row_shift = 9'(sh); i.out_col = addr_t'(oc); i.imm = 8'(imm);
    i.in_col[0] = addr_t'(c0); i.in_col[1] = addr_t'(c1);
    return i;
  endfunction

  task automatic preset(int col, int v, int r0 = 0, int r1 = NR - 1);
    prog.push_back(mk(I_PRESET, G_BUFF, r0, r1, 0, col, v)); n_steps++;
  endtask
  task automatic write(int col, int value, int r0 = 0, int r1 = NR - 1);
    preset(col, 0, r0, r1);
    prog.push_back(mk(I_SBG, G_BUFF, r0, r1, 0, col, value)); n_steps++;
  endtask
  // logic step over all rows; presets next_oc for next_g in the same step
  task automatic gate(gate_e g, int oc, int c0, int c1 = 0, int sh = 0,
                      gate_e next_g = G_BUFF, int next_oc = -1);
    inst_t i;
    i = mk(I_LOGIC, g, 0, NR - 1, sh, oc, int'(gate_preset(next_g)), c0, c1);
    if (next_oc >= 0) begin i.pre_en = 1'b1; i.pre_col = addr_t'(next_oc); end
    prog.push_back(i); n_steps++;
  endtask
  task automatic acc(int row, int col);
    prog.push_back(mk(I_ACC, G_BUFF, row, row, 0, 0, 0, col)); n_acc++;
  endtask

  // 2:1 multiplexer Y = S ? A : B (scaled addition with select S); the
  // output of NOT S must already be preset. Presets next_oc at the end.
  task automatic mux(int y, int a, int b, int s, int sn, int n1, int n2,
                     gate_e next_g = G_BUFF, int next_oc = -1);
    gate(G_NOT, sn, s, 0, 0, G_AND, n1);
    gate(G_AND, n1, a, s, 0, G_AND, n2);
    gate(G_AND, n2, b, sn, 0, G_OR, y);
    gate(G_OR,  y,  n1, n2, 0, next_g, next_oc);
  endtask

  // columns
  localparam int XT = 0, XO = 5, SS = 10, XN = 15, U = 20, CK = 25;  // 5 each
  localparam int SN = 30, N1 = 31, N2 = 32;
  localparam int T0 = 40, Y0 = 45;                                    // exp chain
  localparam int W0 = 50, P0 = 55;                                    // 5-fold product
  localparam int TS = 60, TW = 70, TV = 80;                           // tree, 5 levels

  int   xt, xo [H];
  int   cq [5];               // quantised c/5, c/4, c/3, c/2, c
  real  e1 [H], e5 [H], pdf;

  int res [$];
  always @(posedge clk) if (rst_n && res_valid) res.push_back(int'(res_data));

  function automatic bit close(int got, real p);
    real tol;
    tol = 5.0 * $sqrt(256.0 * p * (1.0 - p)) + 0.04 * 256.0 + 1.0;
    return (real'(got) >= 256.0 * p - tol) && (real'(got) <= 256.0 * p + tol);
  endfunction

  initial begin
    host_we = 0; host_sel = 0; host_start = 0; host_addr = 0; host_wdata = '0;

    xt = 150;
    for (int i = 0; i < H; i++) xo[i] = $urandom_range(40, 240);
    cq[0] = 41; cq[1] = 51; cq[2] = 68; cq[3] = 102; cq[4] = 205;   // 0.8/5 .. 0.8

    // inputs: five independent copies k of X_t, X_(t-i), select, constant
    for (int k = 0; k < 5; k++) begin
      write(XT + k, xt);
      for (int i = 0; i < H; i++) write(XO + k, xo[i], 5 * i, 5 * i + 4);
      write(SS + k, 128);
      write(CK + k, cq[k]);
    end
    // u, five copies: U_k = S ? X_t : NOT X_(t-i)
    preset(XN, int'(gate_preset(G_NOT)));
    for (int k = 0; k < 5; k++) begin
      gate(G_NOT, XN + k, XO + k, 0, 0, G_NOT, SN);
      mux(U + k, XT + k, XN + k, SS + k, SN, N1, N2, G_NOT, (k < 4) ? XN + k + 1 : Y0);
    end
    // exp(-0.8 u): Y0 = NAND(c/5, U0); Yk = NAND(AND(ck, Uk), Y(k-1))
    gate(G_NAND, Y0, CK + 0, U + 0, 0, G_AND, T0 + 1);
    for (int k = 1; k < 5; k++) begin
      gate(G_AND,  T0 + k, CK + k, U + k, 0, G_NAND, Y0 + k);
      gate(G_NAND, Y0 + k, T0 + k, Y0 + k - 1, 0, G_BUFF, (k < 4) ? T0 + k + 1 : W0 + 1);
    end
    // exp(-4u) = product of the five copies in rows 5i..5i+4, into row 5i
    for (int j = 1; j < 5; j++) begin
      gate(G_BUFF, W0 + j, Y0 + 4, 0, -j, G_AND, P0 + j);
      gate(G_AND, P0 + j, (j == 1) ? Y0 + 4 : P0 + j - 1, W0 + j, 0,
           G_BUFF, (j < 4) ? W0 + j + 1 : TW);
    end
    // mean over the 32 frames: tree of multiplexers, level l pairs rows
    // 5i and 5i + 5*2^l
    for (int l = 0; l < 5; l++) begin
      int v, d;
      v = (l == 0) ? P0 + 4 : TV + l - 1;
      d = 5 * (1 << l);
      write(TS + l, 128);
      if (l > 0) preset(TW + l, int'(gate_preset(G_BUFF)));
      gate(G_BUFF, TW + l, v, 0, -d, G_NOT, SN);
      mux(TV + l, v, TW + l, TS + l, SN, N1, N2);
    end
    for (int i = 0; i < H; i++) acc(5 * i, Y0 + 4);   // exp(-0.8u), copy 0
    for (int i = 0; i < H; i++) acc(5 * i, P0 + 4);   // exp(-4u)
    acc(0, TV + 4);                                   // PDF
    prog.push_back(mk(I_HALT, G_BUFF, 0, 0, 0, 0, 0));

    // expected values
    pdf = 0.0;
    for (int i = 0; i < H; i++) begin
      real u, y;
      u = 0.5 * (real'(xt) / 256.0) + 0.5 * (1.0 - real'(xo[i]) / 256.0);
      y = 1.0 - (real'(cq[0]) / 256.0) * u;
      for (int k = 1; k < 5; k++) y = 1.0 - (real'(cq[k]) / 256.0) * u * y;
      e1[i] = y;
      e5[i] = y * y * y * y * y;
      pdf += e5[i] / H;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 256; v++) begin
      @(negedge clk); host_we = 1; host_sel = 0; host_addr = 16'(v); host_wdata = '0;
      host_wdata.imm = calib(v);
    end
    foreach (prog[i]) begin
      @(negedge clk); host_we = 1; host_sel = 1; host_addr = 16'(i); host_wdata = prog[i];
    end
    @(negedge clk); host_we = 0;
    @(negedge clk); host_start = 1;
    @(negedge clk); host_start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);

    checks++;
    if (res.size() != n_acc) begin failures++; $display("%0d results, want %0d", res.size(), n_acc); end
    else begin
      for (int i = 0; i < H; i++) begin
        checks++;
        if (!close(res[i], e1[i])) begin
          failures++; $display("exp(-0.8u) frame %0d: got %0d want %0.1f", i, res[i], 256.0 * e1[i]);
        end
        checks++;
        if (!close(res[H + i], e5[i])) begin
          failures++; $display("exp(-4u) frame %0d: got %0d want %0.1f", i, res[H + i], 256.0 * e5[i]);
        end
        if (i % 8 == 0)
          $display("frame %0d: exp(-0.8u) %0.3f (in memory %0.3f, true %0.3f), exp(-4u) %0.3f (in memory %0.3f)",
                   i, e1[i], real'(res[i]) / 256.0,
                   $exp(-0.8 * (0.5 * real'(xt) / 256.0 + 0.5 * (1.0 - real'(xo[i]) / 256.0))),
                   e5[i], real'(res[H + i]) / 256.0);
      end
      checks++;
      if (!close(res[2 * H], pdf)) begin failures++; $display("PDF: got %0d want %0.1f", res[2 * H], 256.0 * pdf); end
      $display("PDF %0.4f, in memory %0.4f", pdf, real'(res[2 * H]) / 256.0);
    end
    checks++;
    if (steps != 32'(n_steps + n_acc * 32)) begin failures++; $display("steps %0d, want %0d", steps, n_steps + n_acc * 32); end
    $display("program: %0d instructions, %0d compute steps, %0d in-memory steps in all", prog.size(), n_steps, steps);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
